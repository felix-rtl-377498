// tb_wupper_dma_read_write: the request engine of the DMA against the host
// model. Random to-host and from-host requests are issued one at a time
// with the req_valid/req_take handshake. To-host payload comes from a FIFO
// model holding a counter pattern and must land in host memory at the
// request's address; from-host requests must return the host memory words,
// in order, on the FromHost FIFO write port. One completion with a wrong
// length must be dropped and counted. Each request must end with exactly
// one xfer_done, and the word counters must match the totals.
module tb_wupper_dma_read_write;
  import felix_pkg::*;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse

  logic req_valid, req_from_host, req_take, xfer_done;
  logic [63:0] req_addr;
  logic [15:0] req_words, len_errors;
  logic [DATA_W-1:0] th_data, fh_data, rq_data, rc_data;
  logic th_empty, th_rd, fh_wr;
  logic rq_valid, rq_last, rq_ready, rc_valid, rc_last, rc_ready;
  logic [31:0] words_to_host, words_from_host;

  wupper_dma_read_write dut (.*);
  pcie_host_model #(.STALL(1)) host (.clk, .rst_n, .rq_data, .rq_valid, .rq_last, .rq_ready,
                                     .rc_data, .rc_valid, .rc_last, .rc_ready);

  int checks = 0, failures = 0;
  bit started = 0;
  logic [DATA_W-1:0] thq[$], fhq[$];
  int th_pushed = 0, dones = 0;
  assign th_empty = (thq.size() == 0);
  assign th_data  = th_empty ? '0 : thq[0];
  always @(posedge clk) if (started) begin
    if (th_rd) void'(thq.pop_front());
    if (fh_wr) fhq.push_back(fh_data);
    if (xfer_done) dones++;
    if (thq.size() < 8 && $urandom_range(0, 1)) begin
      thq.push_back({8{32'h7000_0000 + 32'(th_pushed)}});
      th_pushed++;
    end
  end

  task automatic request(input bit fh, input longint a, input int n);
    int d0;
    d0 = dones;
    @(negedge clk);
    req_valid = 1; req_from_host = fh; req_addr = a; req_words = 16'(n);
    do @(posedge clk); while (!req_take);
    @(negedge clk) req_valid = 0;
    while (dones == d0) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (dones != d0 + 1) begin failures++; $display("xfer_done count"); end
  endtask

  initial begin
    int tw, fw, base;
    req_valid = 0; req_from_host = 0; req_addr = 0; req_words = 0;
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    started = 1;
    for (int k = 0; k < 64; k++) host.mem_wr(64'h4000 + 32 * k, {8{32'h3000_0000 + 32'(k)}});
    tw = 0; fw = 0;
    for (int r = 0; r < 30; r++) begin
      int n;
      n = $urandom_range(1, 8);
      if (r % 2 == 0) begin
        base = tw;
        request(0, 64'h100000 + 32 * tw, n);
        for (int k = 0; k < n; k++) begin
          checks++;
          if (host.mem_rd(64'h100000 + 32 * (base + k)) !== {8{32'h7000_0000 + 32'(base + k)}}) begin
            failures++; $display("to-host word %0d", base + k);
          end
        end
        tw += n;
      end else begin
        fhq.delete();
        request(1, 64'h4000 + 32 * (fw % 56), n);
        checks++;
        if (fhq.size() != n) begin failures++; $display("from-host words %0d want %0d", fhq.size(), n); end
        foreach (fhq[k]) begin
          checks++;
          if (fhq[k] !== {8{32'h3000_0000 + 32'(fw % 56 + k)}}) begin failures++; $display("from-host word %0d", k); end
        end
        fw += n;
      end
    end
    // completion with a wrong length
    fhq.delete();
    host.bad_len_once = 1;
    request(1, 64'h4000, 4);
    checks++;
    if (fhq.size() != 0 || len_errors != 1) begin failures++; $display("bad length: %0d words, %0d errors", fhq.size(), len_errors); end
    checks++;
    if (words_to_host != 32'(tw) || words_from_host != 32'(fw)) begin
      failures++; $display("word counters %0d %0d want %0d %0d", words_to_host, words_from_host, tw, fw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
