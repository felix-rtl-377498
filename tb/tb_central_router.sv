// tb_central_router: the Central Router of a set of 2 links with 8 E-links.
//  - To-host: every E-link of link 0 carries a counting byte stream in the
//    received frames; link 1 is disabled in elink_en. Every block written to
//    the ToHost FIFO must come from link 0, carry consecutive bytes that
//    continue the previous block of its E-link, with consecutive sequence
//    numbers and the end-of-chunk flag every chunk_size (here 30) bytes.
//  - From-host: blocks for E-links 9 and 12 (link 1) are offered on the
//    FromHost FIFO port; their bytes must appear, one per frame, in the
//    right byte of link 1's transmit field.
//  - TTC: with ttc_sel on link 0, L1A pulses must appear as bit 7 of byte 0
//    of link 0's transmit field in the next frame.
module tb_central_router;
  import felix_pkg::*;
  localparam int L = 2, E = 8;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse

  logic [15:0] chunk_size;
  logic [L-1:0] elink_en, ttc_sel, rx_stb, rx_dvalid, tx_dvalid;
  logic [79:0] rx_data [L], tx_data [L];
  logic frame_stb, l1a, bcr, ecr, brcst_valid;
  logic [7:0] brcst;
  logic th_wr, th_full, fh_empty, fh_rd;
  block_t th_data, fh_data;
  logic [31:0] overflows, ttc_frames;
  logic [15:0] fh_errors;

  central_router #(.LINKS(L), .ELINKS(E), .ID_BASE(0)) dut (.*);

  int checks = 0, failures = 0;
  bit started = 0;
  int nxt [E], seq [E], pos [E];
  bit seen [E];
  int blocks = 0;

  always @(posedge clk) if (started && th_wr) begin
    int id, n;
    id = int'(th_data.hdr.elink);
    n = int'(th_data.hdr.nbytes);
    blocks++;
    checks++;
    if (th_data.hdr.marker != BLK_MARKER || id >= E || n == 0 || n > BLK_BYTES) begin
      failures++; $display("bad block %h", th_data.hdr);
    end else begin
      for (int k = 0; k < n; k++)
        if (th_data.payload[8*k +: 8] != 8'(nxt[id] + k)) begin
          failures++; $display("E-link %0d byte %0d", id, k); break;
        end
      if (int'(th_data.hdr.seq) != seq[id]) begin failures++; $display("E-link %0d seq", id); end
      if (th_data.hdr.eoc != (pos[id] + n == 30)) begin failures++; $display("E-link %0d eoc", id); end
      nxt[id] = (nxt[id] + n) % 256;
      seq[id] = (seq[id] + 1) % 32;
      pos[id] = th_data.hdr.eoc ? 0 : pos[id] + n;
    end
  end

  // from-host byte capture on link 1
  logic [7:0] got [E][$];
  int l1a_tx = 0, l1a_in = 0;
  always @(posedge clk) if (started && frame_stb) begin
    for (int e = 1; e < E; e++) if (tx_data[1][8*e +: 8] != 0) got[e].push_back(tx_data[1][8*e +: 8]);
  end
  // the TTC byte changes one cycle after the strobe
  logic stb_d = 0;
  always @(posedge clk) begin
    stb_d <= frame_stb;
    if (started && stb_d && tx_data[0][7]) l1a_tx++;
    if (started && l1a) l1a_in++;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    chunk_size = 30; elink_en = 2'b01; ttc_sel = 2'b01; th_full = 0;
    rx_stb = 0; rx_dvalid = 0; frame_stb = 0; l1a = 0; bcr = 0; ecr = 0; brcst_valid = 0; brcst = 0;
    fh_empty = 1; fh_data = '0;
    foreach (rx_data[i]) rx_data[i] = '0;
    foreach (nxt[e]) begin nxt[e] = 0; seq[e] = 0; pos[e] = 0; end
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    started = 1;
    fork
      // received frames and TTC
      for (int f = 0; f < 300; f++) begin
        logic [7:0] c;
        @(negedge clk);
        c = 8'(f);
        for (int i = 0; i < L; i++) rx_data[i] = {10{c}};
        rx_stb = '1; rx_dvalid = '1;
        frame_stb = 1;
        l1a = ($urandom_range(0, 4) == 0);
        @(negedge clk);
        rx_stb = 0; frame_stb = 0; l1a = 0;
        repeat (4) @(negedge clk);
      end
      // from-host blocks
      begin
        for (int b = 0; b < 6; b++) begin
          block_t blk;
          int e;
          e = (b % 2 == 0) ? 1 : 4;
          blk = '0;
          blk.hdr.marker = BLK_MARKER;
          blk.hdr.elink = ELINK_ID_W'(E + e);
          blk.hdr.nbytes = 5'(10 + b);
          for (int k = 0; k < 10 + b; k++) blk.payload[8*k +: 8] = 8'(16 * b + k + 1);
          @(negedge clk); fh_data = blk; fh_empty = 0;
          do @(posedge clk); while (!fh_rd);
          @(negedge clk); fh_empty = 1;
        end
        // a block for an E-link outside the router
        @(negedge clk); fh_data.hdr.elink = 11'd200; fh_empty = 0;
        do @(posedge clk); while (!fh_rd);
        @(negedge clk); fh_empty = 1;
      end
    join
    repeat (20) @(negedge clk);
    for (int e = 1; e < E; e++) begin
      logic [7:0] want[$];
      want.delete();
      for (int b = 0; b < 6; b++)
        if ((b % 2 == 0 && e == 1) || (b % 2 == 1 && e == 4))
          for (int k = 0; k < 10 + b; k++) want.push_back(8'(16 * b + k + 1));
      checks++;
      if (got[e] != want) begin failures++; $display("from-host E-link %0d: %0d bytes, want %0d", e, got[e].size(), want.size()); end
    end
    checks++;
    if (fh_errors != 1) begin failures++; $display("fh_errors %0d", fh_errors); end
    checks++;
    if (l1a_tx != l1a_in || l1a_in == 0) begin failures++; $display("L1A in %0d forwarded %0d", l1a_in, l1a_tx); end
    checks++;
    if (blocks < 8 * 300 / 30 || overflows != 0) begin failures++; $display("blocks %0d overflows %0d", blocks, overflows); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
