// tb_gbt_link: loops gbt_tx into gbt_rx through a channel that drops a few
// words at start-up (so the receiver must slip to find the frame) and
// checks that, once locked, every frame's IC, EC and data field arrive
// unchanged and in order, in frame and in wide-bus mode. A single flipped
// bit in frame mode must be counted by the receiver's check. The receiver
// must lock within 40 frames.
module tb_gbt_link;
  import felix_pkg::*;

  localparam int GW = 20;
  localparam int NW = 6;

  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse

  logic          frame_stb, widebus, dvalid;
  logic [1:0]    ic, ec;
  logic [79:0]   data;
  logic [31:0]   wb;
  logic [GW-1:0] tx_word, ch_word;
  logic          r_stb, r_dv, locked;
  logic [1:0]    r_ic, r_ec;
  logic [79:0]   r_data;
  logic [31:0]   r_wb;
  logic [15:0]   chk_err, slips;
  logic [GW-1:0] flip;

  gbt_tx #(.GEAR_W(GW)) u_tx (.clk, .rst_n, .frame_stb, .widebus, .data_valid(dvalid),
    .ic, .ec, .data, .wb_data(wb), .tx_word);
  gbt_rx #(.GEAR_W(GW)) u_rx (.clk, .rst_n, .widebus, .rx_word(ch_word), .frame_stb(r_stb),
    .data_valid(r_dv), .ic(r_ic), .ec(r_ec), .data(r_data), .wb_data(r_wb), .locked,
    .check_errors(chk_err), .slips);

  // channel: three-word delay line, bit flip injection
  logic [GW-1:0] d1, d2, d3;
  always_ff @(posedge clk) begin d1 <= tx_word; d2 <= d1; d3 <= d2; end
  assign ch_word = d3 ^ flip;

  int checks = 0, failures = 0;
  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  // sent frames, indexed by frame number
  logic [115:0] sent[$];
  int received = 0, lock_frame = -1, frames = 0, idx = -1;
  logic mode_wb, tolerate;
  logic started = 0;

  always_ff @(posedge clk) begin
    if (frame_stb && rst_n) sent.push_back({wb, dvalid, ic, ec, data[78:0]});
  end

  // The first received frame fixes the offset; later ones must follow in order.
  always_ff @(posedge clk) begin
    if (r_stb && started) begin
      if (idx < 0) begin
        for (int k = 0; k < sent.size(); k++)
          if (sent[k][83:0] == {r_dv, r_ic, r_ec, r_data[78:0]}) idx = k;
        checks++;
        if (idx < 0) begin failures++; $display("first frame not found"); end
      end else begin
        idx++;
        if (!tolerate) begin
          checks++;
          if (sent[idx][83:0] != {r_dv, r_ic, r_ec, r_data[78:0]} ||
              (mode_wb && sent[idx][115:84] != r_wb)) begin
            failures++;
            $display("mismatch at frame %0d exp %h got %h", idx, sent[idx][83:0], {r_dv, r_ic, r_ec, r_data[78:0]});
          end
        end
      end
      received++;
    end
  end

  task automatic run_frames(input int n);
    for (int f = 0; f < n; f++) begin
      @(negedge clk);
      frame_stb = 1;
      dvalid = ($urandom_range(0, 3) != 0);
      ic = $urandom; ec = $urandom;
      data = {$urandom, $urandom, $urandom};
      wb = $urandom;
      @(negedge clk);
      frame_stb = 0;
      repeat (NW - 2) @(negedge clk);
      frames++;
      if (locked && lock_frame < 0) lock_frame = frames;
    end
  endtask

  initial begin
    frame_stb = 0; widebus = 0; mode_wb = 0; flip = 0; tolerate = 0;
    dvalid = 0; ic = 0; ec = 0; data = 0; wb = 0;
    #1 rst_n = 0;
    @(negedge clk);
    repeat (3) @(negedge clk);
    rst_n = 1;
    started = 1;
    run_frames(60);
    checks++;
    if (!(lock_frame > 0 && lock_frame <= 40)) begin
      failures++; $display("lock took %0d frames", lock_frame);
    end
    checks++;
    if (chk_err != 0) begin failures++; $display("check errors without noise: %0d", chk_err); end
    // single bit error
    tolerate = 1;
    fork
      begin
        repeat (3) @(negedge clk);
        flip = 20'h00400;
        @(negedge clk);
        flip = 0;
      end
    join_none
    run_frames(4);
    tolerate = 0;
    checks++;
    if (chk_err != 1) begin failures++; $display("check_errors=%0d, want 1", chk_err); end
    // wide-bus mode
    widebus = 1;
    run_frames(2);
    mode_wb = 1;
    run_frames(40);
    checks++;
    if (received < 80) begin failures++; $display("only %0d frames received", received); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
