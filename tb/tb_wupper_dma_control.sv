// tb_wupper_dma_control: plays the register block and the read/write
// engine around the descriptor sequencer and checks the request sequence:
//  - a single-pass to-host descriptor of 10 words with 4 words per request
//    issues 4, 4 and a cut-short 2-word request at the right addresses,
//    then is done, disabled and raises its event;
//  - two enabled descriptors are served alternately (round robin);
//  - a circular to-host descriptor wraps to its start, raises an event on
//    each wrap and stops before overtaking the host read pointer until the
//    pointer moves;
//  - a from-host descriptor waits for FromHost FIFO room.
module tb_wupper_dma_control;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse
  logic dwr, rv, take, from_host, xdone;
  logic [2:0] didx, ridx;
  logic [1:0] dfield;
  logic [63:0] dwd, raddr;
  logic [7:0] en_set, enabled, done, evt;
  logic [15:0] th_level, fh_free, rwords;
  logic [63:0] cur [8];
  logic [31:0] stalls;
  wupper_dma_control #(.NUM_DESC(8)) dut (.clk, .rst_n, .desc_wr(dwr), .desc_idx(didx),
    .desc_field(dfield), .desc_wdata(dwd), .enable_set(en_set), .th_level, .fh_free,
    .req_valid(rv), .req_idx(ridx), .req_addr(raddr), .req_words(rwords), .req_from_host(from_host),
    .req_take(take), .xfer_done(xdone), .enabled, .done, .cur_addr(cur), .evt, .full_stalls(stalls));
  int checks = 0, failures = 0, evts[8] = '{default: 0};
  bit started = 0;
  always @(posedge clk) for (int d = 0; d < 8; d++) if (started && rst_n && evt[d]) evts[d]++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask
  task automatic wdesc(input int d, input int f, input logic [63:0] v);
    @(negedge clk); dwr = 1; didx = 3'(d); dfield = 2'(f); dwd = v;
    @(negedge clk); dwr = 0;
  endtask
  task automatic enable(input logic [7:0] m);
    @(negedge clk); en_set = m;
    @(negedge clk); en_set = 0;
  endtask
  // wait for a request, take it, finish it two cycles later
  task automatic serve(output int idx, output longint addr, output int words, output bit fh);
    int n = 0;
    @(negedge clk);
    while (!rv && n < 50) begin @(negedge clk); n++; end
    idx = int'(ridx); addr = longint'(raddr); words = int'(rwords); fh = from_host;
    check(rv, "request expected");
    take = 1;
    @(negedge clk); take = 0;
    check(!rv, "no request while one is in flight");
    @(negedge clk); xdone = 1;
    @(negedge clk); xdone = 0;
  endtask

  initial begin
    int idx, words;
    longint addr;
    bit fh;
    dwr = 0; didx = 0; dfield = 0; dwd = 0; en_set = 0; take = 0; xdone = 0;
    th_level = 0; fh_free = 100;
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    started = 1;
    // descriptor 2: single pass to-host, 10 words, 4 per request
    wdesc(2, 0, 64'h2000); wdesc(2, 1, 64'h2000 + 320); wdesc(2, 2, 64'h004);
    enable(8'h04);
    repeat (3) @(negedge clk);
    check(!rv, "no request with an empty FIFO");
    th_level = 100;
    serve(idx, addr, words, fh); check(idx == 2 && addr == 64'h2000 && words == 4 && !fh, "req 1");
    serve(idx, addr, words, fh); check(idx == 2 && addr == 64'h2080 && words == 4, "req 2");
    serve(idx, addr, words, fh); check(idx == 2 && addr == 64'h2100 && words == 2, "req 3 cut short");
    @(negedge clk);
    check(done[2] && !enabled[2] && evts[2] == 1 && !rv, "done");
    // round robin: descriptors 0 (to-host) and 5 (from-host), both long
    wdesc(0, 0, 64'h0); wdesc(0, 1, 64'h10000); wdesc(0, 2, 64'h001);
    wdesc(5, 0, 64'h8000); wdesc(5, 1, 64'h18000); wdesc(5, 2, 64'h102);
    enable(8'h21);
    for (int k = 0; k < 6; k++) begin
      serve(idx, addr, words, fh);
      check(idx == ((k % 2 == 0) ? 5 : 0), "round robin order");
      check(fh == (idx == 5), "direction");
    end
    // from-host waits for FIFO room
    fh_free = 1; th_level = 0;
    repeat (4) @(negedge clk);
    check(!rv, "from-host waits for room");
    // stop both: re-enable not possible while enabled, so use a fresh descriptor set
    @(negedge clk) rst_n = 0;
    @(negedge clk) rst_n = 1;
    th_level = 100; fh_free = 100;
    // descriptor 1: circular, 8 words, 2 per request, host pointer at start
    wdesc(1, 0, 64'h4000); wdesc(1, 1, 64'h4000 + 256); wdesc(1, 2, 64'h202);
    enable(8'h02);
    for (int k = 0; k < 3; k++) begin
      serve(idx, addr, words, fh); check(addr == 64'h4000 + 64 * k, "circular address");
    end
    // buffer holds 8 words, 6 written: the next request would fill it
    repeat (4) @(negedge clk);
    check(!rv && stalls > 0, "stop before host pointer");
    wdesc(1, 3, 64'h4000 + 128);   // host has read 4 words
    serve(idx, addr, words, fh); check(addr == 64'h4000 + 192, "resume");
    serve(idx, addr, words, fh); check(addr == 64'h4000, "wrap to start");
    repeat (2) @(negedge clk);
    check(evts[1] == 1, $sformatf("event on wrap %0d", evts[1]));
    repeat (4) @(negedge clk);
    check(!rv, "stop again below host pointer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
