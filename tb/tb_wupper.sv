// tb_wupper: the DMA engine against the host model.
//  1. A circular to-host descriptor (64-word buffer, 4 words per request)
//     moves 400 counter-pattern words from the ToHost FIFO into host
//     memory. The testbench acts as the host software: it reads the buffer
//     behind the engine, checks every word in order, and advances the host
//     pointer only now and then, so the engine must stop when the buffer is
//     full ("full stall") and resume after the pointer moves.
//  2. A single-pass from-host descriptor, running at the same time, reads
//     16 words of host memory into the FromHost FIFO; they must arrive in
//     order, and the descriptor must end as done with an interrupt.
//  3. A second from-host pass with one completion announcing a wrong
//     length: that request's words are dropped and the error is counted.
// Finally it reads back a configuration register and a monitor input.
module tb_wupper;
  import felix_pkg::*;
  localparam int AW = 5;      // 32-word FIFOs
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse

  logic reg_wr, reg_rd, reg_rvalid;
  logic [7:0] reg_addr;
  logic [63:0] reg_wdata, reg_rdata;
  logic [DATA_W-1:0] rq_data, rc_data, th_data, fh_data;
  logic rq_valid, rq_last, rq_ready, rc_valid, rc_last, rc_ready;
  logic msi_valid, msi_ack;
  logic [2:0] msi_vec;
  logic th_empty, th_rd, fh_wr;
  logic [AW:0] th_level, fh_level;
  logic [15:0] chunk_size, len_errors;
  logic [1:0] elink_en, ttc_sel, widebus;
  logic [63:0] app_mon [8];

  wupper #(.NUM_DESC(8), .LINKS(2), .FIFO_AW(AW)) dut (.*);
  pcie_host_model #(.STALL(1)) host (.clk, .rst_n, .rq_data, .rq_valid, .rq_last, .rq_ready,
                                     .rc_data, .rc_valid, .rc_last, .rc_ready);

  int checks = 0, failures = 0;
  // ToHost FIFO model, counter pattern
  int th_next = 0, th_pushed = 0, th_limit = 0;
  logic [DATA_W-1:0] thq[$];
  assign th_empty = (thq.size() == 0);
  assign th_data  = th_empty ? '0 : thq[0];
  assign th_level = (AW+1)'(thq.size());
  // FromHost FIFO model
  logic [DATA_W-1:0] fhq[$];
  assign fh_level = (AW+1)'(fhq.size());
  int irq_count[8] = '{default: 0};
  int msi_wait = 0;

  always @(posedge clk) begin
    if (th_rd) void'(thq.pop_front());
    if (fh_wr) fhq.push_back(fh_data);
    if (thq.size() < 30 && th_pushed < th_limit) begin
      thq.push_back({8{32'(th_pushed)}});
      th_pushed++;
    end
    msi_ack <= 0;
    if (msi_valid && !msi_ack) begin
      msi_wait++;
      if (msi_wait > 2) begin msi_ack <= 1; irq_count[msi_vec]++; msi_wait = 0; end
    end
  end
  initial foreach (app_mon[i]) app_mon[i] = 64'(i);

  task automatic wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_wr = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [63:0] d);
    @(negedge clk); reg_rd = 1; reg_addr = a;
    @(negedge clk); reg_rd = 0;
    d = reg_rdata;
  endtask

  localparam longint TB_START = 64'h1000, TB_END = 64'h1000 + 32 * 64;
  localparam longint FB_START = 64'h8000, FB_END = 64'h8000 + 32 * 16;

  initial begin
    logic [63:0] v, cur;
    longint rp;
    int seen;
    reg_wr = 0; reg_rd = 0; reg_addr = 0; reg_wdata = 0; msi_ack = 0;
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 16; k++) host.mem_wr(FB_START + 32 * k, {8{32'h5000_0000 + 32'(k)}});
    // descriptor 0: circular to-host; descriptor 1: single-pass from-host
    wr(8'h00, TB_START); wr(8'h01, TB_END); wr(8'h02, 64'h204);
    wr(8'h04, FB_START); wr(8'h05, FB_END); wr(8'h06, 64'h104);
    wr(8'h20, 64'h3);
    th_limit = 400;
    rp = TB_START; seen = 0;
    // host software loop
    for (int it = 0; it < 4000 && seen < 400; it++) begin
      rd(8'h03, cur);
      // words between rp and cur are new
      if (it % 150 == 149) begin
        while (rp != longint'(cur)) begin
          logic [DATA_W-1:0] w;
          w = host.mem_rd(rp);
          checks++;
          if (w !== {8{32'(seen)}}) begin failures++; $display("to-host word %0d wrong: %h", seen, w[31:0]); end
          seen++;
          rp += 32;
          if (rp == TB_END) rp = TB_START;
        end
        wr(8'h03, 64'(rp));
      end
    end
    checks++;
    if (seen != 400) begin failures++; $display("to-host words seen %0d", seen); end
    checks++;
    if (dut.full_stalls == 0) begin failures++; $display("no full stall"); end
    // from-host
    checks++;
    if (fhq.size() != 16) begin failures++; $display("from-host words %0d", fhq.size()); end
    foreach (fhq[k]) begin
      checks++;
      if (fhq[k] !== {8{32'h5000_0000 + 32'(k)}}) begin failures++; $display("from-host word %0d", k); end
    end
    rd(8'h21, v);
    checks++;
    if (v[1] != 1'b1 || v[0] != 1'b0) begin failures++; $display("done mask %h", v); end
    checks++;
    if (irq_count[1] != 1 || irq_count[0] == 0) begin failures++; $display("irqs %0d %0d", irq_count[0], irq_count[1]); end
    // second pass with a bad completion length
    fhq.delete();
    host.bad_len_once = 1;
    wr(8'h20, 64'h2);
    repeat (300) @(negedge clk);
    checks++;
    if (len_errors != 1 || fhq.size() != 12) begin failures++; $display("len_errors %0d words %0d", len_errors, fhq.size()); end
    foreach (fhq[k]) begin
      checks++;
      if (fhq[k] !== {8{32'h5000_0000 + 32'(k + 4)}}) begin failures++; $display("pass 2 word %0d", k); end
    end
    // register read-back of configuration and monitors
    rd(8'h30, v); checks++; if (v != 40) begin failures++; $display("chunk reset %0d", v); end
    wr(8'h30, 64'd57); rd(8'h30, v); checks++; if (v != 57 || chunk_size != 57) begin failures++; $display("chunk rw"); end
    rd(8'h43, v); checks++; if (v != 3) begin failures++; $display("mon 3 = %0d", v); end
    $display("requests: %0d writes, %0d reads, %0d model stalls", host.writes, host.reads, host.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
