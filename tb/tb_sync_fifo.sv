// tb_sync_fifo: random writes and reads against a queue model; checks data
// order, the level count, and the full and empty flags at their limits.
module tb_sync_fifo;
  localparam int W = 256, D = 16;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse
  logic wr_en, rd_en, full, empty;
  logic [W-1:0] wd, rdat;
  logic [4:0] level;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .wr_en, .wr_data(wd), .full,
                                         .rd_en, .rd_data(rdat), .empty, .level);
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  initial begin
    wr_en = 0; rd_en = 0; wd = '0;
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (level != q.size() || full != (q.size() == D) || empty != (q.size() == 0)) begin
        failures++; $display("level %0d model %0d", level, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (rdat !== q[0]) begin failures++; $display("data mismatch"); end
      end
      // phases: fill, drain, mixed
      wr_en = !full && ((i % 600 < 200) ? 1 : (i % 600 < 400) ? 0 : $urandom_range(0, 1));
      rd_en = !empty && ((i % 600 < 200) ? 0 : (i % 600 < 400) ? 1 : $urandom_range(0, 1));
      wd = {8{$urandom}};
      @(posedge clk);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
