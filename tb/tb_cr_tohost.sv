// tb_cr_tohost: four E-links receive random bytes at random frames while
// the FIFO side is randomly full. Every block written to the FIFO is
// checked for marker, E-link number and sequence order, and the payloads of
// each E-link, joined in order, must equal the bytes sent on it. No block
// may be lost at this load.
module tb_cr_tohost;
  import felix_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse
  logic [N-1:0] bv;
  logic [7:0] bytes [N];
  logic wr, full;
  block_t d;
  logic [31:0] ovf;
  cr_tohost #(.NUM_ELINKS(N), .ID_BASE(8)) dut (.clk, .rst_n, .chunk_size(16'd40), .byte_valid(bv),
    .byte_in(bytes), .fifo_wr(wr), .fifo_data(d), .fifo_full(full), .total_overflows(ovf));
  int checks = 0, failures = 0;
  logic [7:0] sent [N][$];
  logic [7:0] got  [N][$];
  logic [4:0] seq [N];
  logic started = 0;
  int blocks = 0;

  always @(posedge clk) if (started && wr) begin
    int e;
    e = int'(d.hdr.elink) - 8;
    checks++;
    blocks++;
    if (d.hdr.marker != BLK_MARKER || e < 0 || e >= N || d.hdr.seq != seq[e]) begin
      failures++; $display("bad header %h", d.hdr);
    end else begin
      seq[e]++;
      for (int k = 0; k < d.hdr.nbytes; k++) got[e].push_back(d.payload[8*k +: 8]);
    end
  end

  initial begin
    bv = 0; full = 0;
    foreach (seq[e]) seq[e] = 0;
    foreach (bytes[e]) bytes[e] = 0;
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1; started = 1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      full = ($urandom_range(0, 3) == 0);
      for (int e = 0; e < N; e++) begin
        bv[e] = (i % 6 == 0) && ($urandom_range(0, 3) != 0);
        bytes[e] = $urandom;
        if (bv[e]) sent[e].push_back(bytes[e]);
      end
    end
    @(negedge clk); bv = 0; full = 0;
    repeat (20) @(negedge clk);
    for (int e = 0; e < N; e++) begin
      checks++;
      // bytes of the last, unfinished block are still inside the packer
      if (got[e].size() > sent[e].size() || sent[e].size() - got[e].size() >= 28) begin
        failures++; $display("elink %0d: got %0d of %0d bytes", e, got[e].size(), sent[e].size());
      end
      for (int k = 0; k < got[e].size(); k++) if (got[e][k] != sent[e][k]) begin
        failures++; $display("elink %0d byte %0d differs", e, k); break;
      end
    end
    checks++;
    if (ovf != 0) begin failures++; $display("overflows %0d", ovf); end
    $display("blocks %0d", blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
