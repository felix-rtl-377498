// gbt_tx: transmit half of the GBT link wrapper.
//
// On each frame strobe (40 MHz) it takes the 2-bit IC, 2-bit EC and 80-bit
// data field, scrambles those 84 bits on four 21-bit lanes, prefixes the
// 4-bit data header and appends a 32-bit trailer, giving a 120-bit frame.
// A gearbox then sends the frame as FRAME_W/GEAR_W words, least significant
// first, one word per clock, so the clock runs at FRAME_W/GEAR_W times the
// frame rate (six words of 20 bits at 240 MHz for 4.8 Gb/s).
//
// In GBT frame mode the trailer carries one 8-bit check word per scrambled
// lane. The real GBT link puts a Reed-Solomon code there; that encoder is
// not built. In wide-bus mode the trailer carries 32 more scrambled user
// bits (wb_data), trading error protection for payload as in the paper.
//
// Timing: frame_stb must come once every FRAME_W/GEAR_W cycles. The frame
// taken at a strobe starts leaving on tx_word the cycle after it, and the
// last word of a frame leaves in the cycle of the next strobe.
// Follows the paper: scrambler, gearbox, frame and wide-bus modes, 240 MHz.
// Own choices: frame bit layout, scrambler polynomial, check word.
module gbt_tx
  import felix_pkg::*;
#(
  parameter int unsigned GEAR_W = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              frame_stb,
  input  logic              widebus,
  input  logic              data_valid,   // 0 sends the idle header
  input  logic [1:0]        ic,
  input  logic [1:0]        ec,
  input  logic [79:0]       data,
  input  logic [31:0]       wb_data,
  output logic [GEAR_W-1:0] tx_word
);

  localparam int unsigned NWORDS = FRAME_W / GEAR_W;

  logic [83:0]        scr_q;       // last scrambled 84 bits, scrambler state
  logic [83:0]        scr_d;
  logic [31:0]        wb_scr_d;
  logic [20:0]        wb_prev_q;   // wide-bus trailer scrambler state
  logic [31:0]        trailer;
  logic [FRAME_W-1:0] shreg_q;
  logic [83:0]        plain;

  assign plain = {data, ec, ic};

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      scr_d[21*l +: 21] = scramble21(plain[21*l +: 21], scr_q[21*l +: 21]);
    end
    wb_scr_d = {wb_data[31:21] ^ scr_d[10:0],
                scramble21(wb_data[20:0], wb_prev_q)};
    if (widebus) begin
      trailer = wb_scr_d;
    end else begin
      for (int l = 0; l < 4; l++) begin
        trailer[8*l +: 8] = lane_check(scr_d[21*l +: 21]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scr_q     <= '0;
      wb_prev_q <= '0;
      shreg_q   <= '0;
    end else if (frame_stb) begin
      scr_q     <= scr_d;
      wb_prev_q <= wb_scr_d[20:0];
      shreg_q   <= {trailer, scr_d, (data_valid ? HDR_DATA : HDR_IDLE)};
    end else begin
      shreg_q   <= shreg_q >> GEAR_W;
    end
  end

  assign tx_word = shreg_q[GEAR_W-1:0];

  initial begin
    assert (FRAME_W % GEAR_W == 0) else $error("GEAR_W must divide 120");
  end

endmodule
