// tb_elink_tohost: sends random bytes through one packer for several chunk
// sizes and compares every block (header fields and payload) with blocks
// built by a reference model in the testbench. Finally it stops reading so
// that the queue fills and checks that dropped blocks are counted and leave
// a gap in the sequence numbers.
module tb_elink_tohost;
  import felix_pkg::*;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse

  logic [15:0] chunk_size;
  logic bv, bready, blk_valid;
  logic [7:0] b;
  block_t blk;
  logic [15:0] ovf;

  elink_tohost dut (.clk, .rst_n, .elink_id(11'd77), .chunk_size, .byte_valid(bv), .byte_in(b),
                    .blk_valid, .blk_ready(bready), .blk, .overflows(ovf));

  int checks = 0, failures = 0;
  block_t exp_q[$];
  // reference model state
  logic [7:0] mb[$];
  int mcc = 0;
  logic [4:0] mseq = 0;
  logic started = 0;

  task automatic model_byte(input logic [7:0] x);
    block_t e;
    logic eoc;
    mb.push_back(x);
    mcc++;
    eoc = (mcc >= chunk_size);
    if (eoc || mb.size() == 28) begin
      e = '0;
      e.hdr.marker = 8'hAB; e.hdr.elink = 11'd77; e.hdr.seq = mseq; e.hdr.eoc = eoc;
      e.hdr.nbytes = 5'(mb.size());
      foreach (mb[k]) e.payload[8*k +: 8] = mb[k];
      exp_q.push_back(e);
      mb.delete();
      mseq++;
      if (eoc) mcc = 0;
    end
  endtask

  always @(posedge clk) if (started && blk_valid && bready) begin
    block_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected block"); end
    else begin
      e = exp_q.pop_front();
      if (blk !== e) begin failures++; $display("block mismatch seq %0d vs %0d", blk.hdr.seq, e.hdr.seq); end
    end
  end

  initial begin
    int sizes[4] = '{40, 10, 28, 57};
    bv = 0; b = 0; bready = 0; chunk_size = 40;
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1; started = 1;
    foreach (sizes[s]) begin
      chunk_size = 16'(sizes[s]);
      for (int i = 0; i < sizes[s] * 60; i++) begin
        @(negedge clk);
        bready = ($urandom_range(0, 3) != 0);
        bv = ($urandom_range(0, 5) == 0);   // one byte per frame, frames every 6 cycles on average
        b = $urandom;
        if (bv) model_byte(b);
      end
      @(negedge clk); bv = 0; bready = 1;
      repeat (10) @(negedge clk);
    end
    checks++;
    if (exp_q.size() != 0 || ovf != 0) begin failures++; $display("left %0d ovf %0d", exp_q.size(), ovf); end
    // overflow: no reads, two 10-byte chunks fit, the next three are dropped
    chunk_size = 10; bready = 0;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); bv = 1; b = 8'(i);
    end
    @(negedge clk); bv = 0;
    checks++;
    if (ovf != 3) begin failures++; $display("overflows %0d, want 3", ovf); end
    checks++;
    if (!(blk_valid && blk.hdr.seq == mseq)) begin failures++; $display("head seq %0d", blk.hdr.seq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
