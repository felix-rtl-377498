// tb_ttc_decoder: drives an interleaved A/B TTC bit stream built by the
// testbench (random L1As on A, short broadcasts and long frames on B) and
// checks every L1A pulse, every broadcast and its BCR/ECR pulses against
// what was sent, including their one-cycle latency.
module tb_ttc_decoder;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse

  logic bit_in, bit_v;
  logic l1a, bcr, ecr, bv;
  logic [7:0] brcst, ferr;

  ttc_decoder dut (.clk, .rst_n, .ttc_bit(bit_in), .ttc_bit_valid(bit_v), .l1a, .bcr, .ecr,
                   .brcst, .brcst_valid(bv), .frame_errors(ferr));

  int checks = 0, failures = 0;
  logic bq[$];              // B-channel bits to send
  int   exp_l1a = 0, got_l1a = 0, exp_b = 0, got_b = 0;
  logic [7:0] exp_cmd[$];
  logic last_a;
  logic started = 0;

  task automatic push_short(input logic [7:0] cmd);
    bq.push_back(0); bq.push_back(0);
    for (int i = 7; i >= 0; i--) bq.push_back(cmd[i]);
    for (int i = 0; i < 5; i++) bq.push_back(^(cmd >> i));
    bq.push_back(1);
    exp_cmd.push_back(cmd);
  endtask

  task automatic push_long();
    bq.push_back(0); bq.push_back(1);
    for (int i = 0; i < 40; i++) bq.push_back($urandom_range(0, 1));
  endtask

  // one A bit then one B bit per bunch crossing, a bit every other cycle
  task automatic send_bc();
    logic a;
    a = ($urandom_range(0, 9) == 0);
    @(negedge clk); bit_v = 1; bit_in = a; last_a = a;
    @(negedge clk); bit_v = 0;
    if (a) exp_l1a++;
    // the pulse must be on now (one cycle after the A bit)
    checks++;
    if (l1a !== a) begin failures++; $display("l1a wrong"); end
    @(negedge clk); bit_v = 1; bit_in = (bq.size() > 0) ? bq.pop_front() : 1'b1;
    @(negedge clk); bit_v = 0;
  endtask

  always @(posedge clk) if (started) begin
    if (l1a) got_l1a++;
    if (bv) begin
      logic [7:0] e;
      got_b++;
      checks++;
      e = exp_cmd.pop_front();
      if (brcst !== e || bcr !== e[0] || ecr !== e[1]) begin
        failures++; $display("brcst %h exp %h", brcst, e);
      end
    end
  end

  initial begin
    bit_v = 0; bit_in = 1;
    #1 rst_n = 0;
    @(negedge clk);
    repeat (2) @(negedge clk);
    rst_n = 1; started = 1;
    for (int k = 0; k < 40; k++) begin
      case ($urandom_range(0, 2))
        0: push_short(8'h01);                 // BCR
        1: push_short($urandom);
        default: push_long();
      endcase
      for (int i = 0; i < 10; i++) bq.push_back(1);
    end
    push_short(8'h02);                        // ECR
    while (bq.size() > 0) send_bc();
    repeat (4) send_bc();
    checks++;
    if (got_l1a != exp_l1a) begin failures++; $display("l1a count %0d/%0d", got_l1a, exp_l1a); end
    checks++;
    if (exp_cmd.size() != 0) begin failures++; $display("%0d broadcasts missing", exp_cmd.size()); end
    checks++;
    if (ferr != 0) begin failures++; $display("frame errors"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
