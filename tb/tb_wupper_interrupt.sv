// tb_wupper_interrupt: random events on eight vectors with a mask; checks
// that every masked-in event is delivered (events on a vector already
// pending merge), masked-out ones never are, the lowest pending vector goes
// first, and msi_vec holds until acknowledged.
module tb_wupper_interrupt;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse
  logic [7:0] evt, mask;
  logic v, ack;
  logic [2:0] vec;
  logic [31:0] sent;
  wupper_interrupt #(.NUM_VEC(8)) dut (.clk, .rst_n, .evt, .mask, .msi_valid(v), .msi_vec(vec),
    .msi_ack(ack), .sent);
  int checks = 0, failures = 0, delivered = 0;
  logic [7:0] pend = 0, pold = 0, last = 0;   // pold/last: pending before and events at the last edge
  int wait_c = 0;
  initial begin
    evt = 0; mask = 8'b1011_0111; ack = 0;
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      ack = 0;
      if (v) begin
        wait_c++;
        if (wait_c == 1) begin
          // just issued: it must be the lowest pending vector
          checks++;
          if (!mask[vec] || !pold[vec] || (pold & ((8'd1 << vec) - 8'd1)) != 0) begin
            failures++; $display("vector %0d not expected, pending %b", vec, pold);
          end
          pend = (pold & ~(8'd1 << vec)) | last;
        end
        if (wait_c == 3) begin ack = 1; wait_c = 0; delivered++; end
      end
      evt = (i < 1900 && $urandom_range(0, 7) == 0) ? 8'(1 << $urandom_range(0, 7)) : 8'h0;
      pold = pend;
      last = evt & mask;
      pend = pold | last;
    end
    checks++;
    if (pend != 0 || sent != 32'(delivered)) begin failures++; $display("left %b sent %0d", pend, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  a_stable: assert property (@(posedge clk) disable iff (!rst_n) v && !ack |=> $stable(vec));
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
