// gbt_rx: receive half of the GBT link wrapper.
//
// A gearbox shifts the received GEAR_W-bit words into a 120-bit window. A
// word counter marks every FRAME_W/GEAR_W-th word as the end of a frame;
// if the window's 4-bit header is neither the data nor the idle header, the
// counter skips one word (word slip) and tries the next phase. After
// LOCK_COUNT good headers in a row the link is locked; four bad headers in
// a row drop the lock. Each frame is descrambled (the descrambler is
// self-synchronising, so it needs no seed) and split into IC, EC and data.
// In GBT frame mode the trailer's per-lane check words are recomputed and
// mismatches counted; no Reed-Solomon decoder is built, so errors are
// detected, not corrected. In wide-bus mode the trailer is descrambled into
// wb_data.
//
// Timing: frame_stb pulses for one cycle with the fields of a frame, one
// cycle after the frame's last word arrived on rx_word.
// Follows the paper: gearbox, descrambler, frame and wide-bus modes.
// Own choices: frame layout, lock rule, check word instead of FEC.
module gbt_rx
  import felix_pkg::*;
#(
  parameter int unsigned GEAR_W     = 20,
  parameter int unsigned LOCK_COUNT = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              widebus,
  input  logic [GEAR_W-1:0] rx_word,
  output logic              frame_stb,
  output logic              data_valid,   // data header (not idle)
  output logic [1:0]        ic,
  output logic [1:0]        ec,
  output logic [79:0]       data,
  output logic [31:0]       wb_data,
  output logic              locked,
  output logic [15:0]       check_errors,
  output logic [15:0]       slips
);

  localparam int unsigned NWORDS = FRAME_W / GEAR_W;

  logic [FRAME_W-1:0]         win_q;
  logic [$clog2(NWORDS)-1:0]  wcnt_q;
  logic [$clog2(LOCK_COUNT+1)-1:0] good_q;
  logic [2:0]                 bad_q;
  logic [83:0]                yprev_q;
  logic [20:0]                wbprev_q;

  logic [FRAME_W-1:0] win_d;
  logic               at_frame;
  logic [3:0]         hdr;
  logic               hdr_ok;
  logic [83:0]        y, x;
  logic [31:0]        trl;
  logic               chk_bad;

  assign win_d    = {rx_word, win_q[FRAME_W-1:GEAR_W]};
  assign at_frame = (wcnt_q == NWORDS - 1);
  assign hdr      = win_d[3:0];
  assign hdr_ok   = (hdr == HDR_DATA) || (hdr == HDR_IDLE);
  assign y        = win_d[87:4];
  assign trl      = win_d[119:88];

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      x[21*l +: 21] = descramble21(y[21*l +: 21], yprev_q[21*l +: 21]);
    end
    chk_bad = 1'b0;
    for (int l = 0; l < 4; l++) begin
      if (trl[8*l +: 8] != lane_check(y[21*l +: 21])) chk_bad = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_q        <= '0;
      wcnt_q       <= '0;
      good_q       <= '0;
      bad_q        <= '0;
      locked       <= 1'b0;
      yprev_q      <= '0;
      wbprev_q     <= '0;
      frame_stb    <= 1'b0;
      data_valid   <= 1'b0;
      ic           <= '0;
      ec           <= '0;
      data         <= '0;
      wb_data      <= '0;
      check_errors <= '0;
      slips        <= '0;
    end else begin
      win_q     <= win_d;
      frame_stb <= 1'b0;
      if (!at_frame) begin
        wcnt_q <= wcnt_q + 1'b1;
      end else begin
        yprev_q  <= y;
        wbprev_q <= trl[20:0];
        if (hdr_ok) begin
          wcnt_q <= '0;
          bad_q  <= '0;
          if (good_q < LOCK_COUNT) good_q <= good_q + 1'b1;
          if (good_q >= LOCK_COUNT - 1) locked <= 1'b1;
        end else begin
          good_q <= '0;
          if (locked) begin
            wcnt_q <= '0;           // keep phase while locked
            bad_q  <= bad_q + 1'b1;
            if (bad_q == 3'd3) locked <= 1'b0;
          end else begin
            // stay on the last word one more cycle: slip by one word
            slips <= slips + 1'b1;
          end
        end
        if (locked || (hdr_ok && good_q >= LOCK_COUNT - 1)) begin
          frame_stb  <= hdr_ok;
          data_valid <= (hdr == HDR_DATA);
          ic         <= x[1:0];
          ec         <= x[3:2];
          data       <= x[83:4];
          wb_data    <= {trl[31:21] ^ y[10:0], descramble21(trl[20:0], wbprev_q)};
          if (!widebus && hdr_ok && chk_bad) check_errors <= check_errors + 1'b1;
        end
      end
    end
  end

endmodule
