// tb_prbs31_checker: feeds a PRBS-31 stream generated here with a serial
// LFSR, checks that the checker locks, counts no errors on clean data,
// counts exactly the expected bits (3 per flipped bit) after errors are
// injected, and does not lock on a constant pattern.
module tb_prbs31_checker;
  localparam int W = 20;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse
  logic valid, locked;
  logic [W-1:0] data;
  logic [31:0] errs, words;
  prbs31_checker #(.W(W)) dut (.clk, .rst_n, .valid, .data, .locked, .bit_errors(errs), .words);
  int checks = 0, failures = 0;
  logic [30:0] lfsr = 31'h1234567;

  function automatic logic [W-1:0] next_word();
    logic [W-1:0] w;
    for (int i = 0; i < W; i++) begin
      w[i] = lfsr[30] ^ lfsr[27];
      lfsr = {lfsr[29:0], w[i]};
    end
    return w;
  endfunction

  initial begin
    valid = 0; data = 0;
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    // constant data: must not lock
    repeat (20) begin @(negedge clk); valid = 1; data = '0; end
    @(negedge clk); valid = 0;
    checks++; if (locked) begin failures++; $display("locked on zeros"); end
    repeat (100) begin @(negedge clk); valid = 1; data = next_word(); end
    @(negedge clk); valid = 0;
    checks++; if (!locked) begin failures++; $display("no lock"); end
    checks++; if (errs != 0) begin failures++; $display("errors on clean data %0d", errs); end
    // five isolated single-bit errors, far apart
    for (int e = 0; e < 5; e++) begin
      @(negedge clk); valid = 1; data = next_word() ^ (W'(1) << (e + 3));
      repeat (5) begin @(negedge clk); data = next_word(); end
    end
    @(negedge clk); valid = 0;
    checks++; if (errs != 15) begin failures++; $display("errors %0d, want 15", errs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
