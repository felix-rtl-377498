// tb_cr_fromhost: pushes random blocks for four E-links (plus a few with a
// bad marker or a foreign E-link number) through a FIFO model and checks
// that each E-link sends exactly its blocks' payload bytes, in order, one
// byte per frame strobe, and that bad blocks are counted and dropped.
module tb_cr_fromhost;
  import felix_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse
  logic empty, rd, fstb;
  block_t d;
  logic [7:0] tb_byte [N];
  logic [N-1:0] tv;
  logic [15:0] errs;
  cr_fromhost #(.NUM_ELINKS(N), .ID_BASE(16)) dut (.clk, .rst_n, .fifo_empty(empty), .fifo_data(d),
    .fifo_rd(rd), .frame_stb(fstb), .tx_byte(tb_byte), .tx_valid(tv), .errors(errs));
  int checks = 0, failures = 0;
  block_t fq[$];
  logic [7:0] exp [N][$];
  int bad = 0;
  logic started = 0;
  int cyc = 0;

  assign empty = (fq.size() == 0);
  assign d = empty ? '0 : fq[0];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (started && rd) void'(fq.pop_front());
  end
  assign fstb = (cyc % 6 == 0);

  // outputs change right after a frame strobe
  always @(negedge clk) if (started && fstb) begin
    for (int e = 0; e < N; e++) if (tv[e]) begin
      checks++;
      if (exp[e].size() == 0 || tb_byte[e] != exp[e][0]) begin
        failures++; $display("elink %0d wrong byte", e);
      end
      if (exp[e].size() > 0) void'(exp[e].pop_front());
    end
  end

  initial begin
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1; started = 1;
    for (int b = 0; b < 80; b++) begin
      block_t x;
      int e;
      x = '0;
      e = $urandom_range(0, N - 1);
      x.hdr.marker = BLK_MARKER;
      x.hdr.elink = 11'(16 + e);
      x.hdr.nbytes = 5'($urandom_range(1, 28));
      x.payload = {7{$urandom}};
      if (b % 20 == 5) begin x.hdr.marker = 8'h00; bad++; end
      else if (b % 20 == 9) begin x.hdr.elink = 11'd3; bad++; end
      else for (int k = 0; k < x.hdr.nbytes; k++) exp[e].push_back(x.payload[8*k +: 8]);
      fq.push_back(x);
    end
    repeat (80 * 28 * 6 + 200) @(negedge clk);
    for (int e = 0; e < N; e++) begin
      checks++;
      if (exp[e].size() != 0) begin failures++; $display("elink %0d: %0d bytes not sent", e, exp[e].size()); end
    end
    checks++;
    if (errs != 16'(bad)) begin failures++; $display("errors %0d want %0d", errs, bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
