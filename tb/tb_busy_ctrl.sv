// tb_busy_ctrl: sweeps the two FIFO levels up and down and checks BUSY
// against a hysteresis model (on at HI, off only when all are below LO),
// the force input, and the count of BUSY assertions.
module tb_busy_ctrl;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse
  logic [9:0] lv [2];
  logic force_b, busy;
  logic [31:0] cnt;
  busy_ctrl #(.NUM_SETS(2), .LEVEL_W(10), .HI(384), .LO(256)) dut (.clk, .rst_n, .level(lv),
    .busy_force(force_b), .busy, .busy_asserts(cnt));
  int checks = 0, failures = 0, rises = 0;
  logic st = 0, expb = 0, prev = 0;
  initial begin
    lv[0] = 0; lv[1] = 0; force_b = 0;
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (busy != expb) begin failures++; $display("cycle %0d busy %b exp %b", i, busy, expb); end
      lv[0] = 10'((i % 1000 < 500) ? (i % 500) : 499 - (i % 500));
      lv[1] = 10'($urandom_range(0, 300));
      force_b = (i > 2800 && i < 2850);
      if (lv[0] >= 384 || lv[1] >= 384) st = 1;
      else if (lv[0] < 256 && lv[1] < 256) st = 0;
      expb = st | force_b;
      if (expb && !prev) rises++;
      prev = expb;
    end
    @(negedge clk);
    checks++;
    if (cnt != 32'(rises)) begin failures++; $display("asserts %0d exp %0d", cnt, rises); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
