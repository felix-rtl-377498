// busy_ctrl: BUSY output towards the TTC system.
//
// Each firmware set reports the fill level of its ToHost FIFO. BUSY rises
// when any level reaches HI and falls only when all levels are below LO
// (hysteresis), so the trigger is throttled before data must be dropped.
// Software can force BUSY through busy_force. busy_asserts counts rising
// edges of the output.
// Timing: one register stage from levels to busy.
// Follows the paper: a BUSY signal from the 'TTC & Busy' block to a front
// panel output. Own choices: the rule, thresholds and force bit.
module busy_ctrl #(
  parameter int unsigned NUM_SETS = 2,
  parameter int unsigned LEVEL_W  = 10,
  parameter int unsigned HI       = 384,
  parameter int unsigned LO       = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [LEVEL_W-1:0] level [NUM_SETS],
  input  logic               busy_force,
  output logic               busy,
  output logic [31:0]        busy_asserts
);

  logic any_hi, all_lo, state_q;

  always_comb begin
    any_hi = 1'b0;
    all_lo = 1'b1;
    for (int s = 0; s < NUM_SETS; s++) begin
      if (level[s] >= LEVEL_W'(HI)) any_hi = 1'b1;
      if (level[s] >= LEVEL_W'(LO)) all_lo = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= 1'b0;
      busy         <= 1'b0;
      busy_asserts <= '0;
    end else begin
      logic s;
      s = any_hi ? 1'b1 : (all_lo ? 1'b0 : state_q);
      state_q <= s;
      busy    <= s | busy_force;
      if ((s | busy_force) && !busy) busy_asserts <= busy_asserts + 1'b1;
    end
  end

  initial assert (LO < HI) else $error("LO must be below HI");

endmodule
