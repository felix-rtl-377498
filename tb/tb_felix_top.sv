// tb_felix_top: end-to-end test of the FELIX card at reduced size (2 sets of
// 2 GBT links, 8 E-links each, 32-word FIFOs).
//
// Around the card the testbench builds:
//  - front-end emulators: one GBT transmitter per link sends a counting byte
//    stream on every E-link, through a channel that delays each link by a
//    different number of words, so every receiver must slip to find frames;
//  - a TTC source: a serial A/B stream with L1A bits and broadcast commands;
//  - one host model per set (PCIe core plus memory) and host software that
//    programs the DMA descriptors through the register port, follows the
//    circular to-host buffer and checks every block in it;
//  - a front-end receiver on the first link of set 1, which checks the
//    from-host bytes and the forwarded TTC byte.
// Phases: the host first reads the to-host buffer too slowly, so the buffer
// fills (DMA full stall), the ToHost FIFO fills (BUSY) and E-link queues
// drop blocks (overflow); then it keeps up. One link is switched to
// wide-bus mode half way. Set 1 runs a from-host transfer, then a second
// one with a bad completion length. Each mechanism is counted and a failure
// is counted for any that never happened.
module tb_felix_top;
  import felix_pkg::*;

  localparam int NS = 2, LPS = 2, EL = 8, FD = 6, DEPTH = 32;
  localparam int NL = NS * LPS, GW = 120 / FD, NE = NL * EL;

  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse

  logic              ttc_bit, ttc_bit_valid;
  logic [GW-1:0]     gbt_rx_word [NL];
  logic [GW-1:0]     gbt_tx_word [NL];
  logic              reg_wr [NS], reg_rd [NS], reg_rvalid [NS];
  logic [7:0]        reg_addr [NS];
  logic [63:0]       reg_wdata [NS], reg_rdata [NS];
  logic [DATA_W-1:0] rq_data [NS], rc_data [NS];
  logic              rq_valid [NS], rq_last [NS], rq_ready [NS];
  logic              rc_valid [NS], rc_last [NS], rc_ready [NS];
  logic              msi_valid [NS], msi_ack [NS];
  logic [2:0]        msi_vec [NS];
  logic              busy_force, busy_out;
  logic [31:0]       busy_asserts;
  logic [7:0]        ttc_frame_errors;

  felix_top #(.NUM_SETS(NS), .LINKS_PER_SET(LPS), .ELINKS_PER_LINK(EL), .FRAME_DIV(FD),
              .FIFO_DEPTH(DEPTH)) dut (.*);

  for (genvar s = 0; s < NS; s++) begin : g_h
    pcie_host_model #(.STALL(1)) host (.clk, .rst_n, .rq_data(rq_data[s]), .rq_valid(rq_valid[s]),
      .rq_last(rq_last[s]), .rq_ready(rq_ready[s]), .rc_data(rc_data[s]), .rc_valid(rc_valid[s]),
      .rc_last(rc_last[s]), .rc_ready(rc_ready[s]));
  end

  function automatic logic [DATA_W-1:0] hrd(input int s, input longint a);
    return (s == 0) ? g_h[0].host.mem_rd(a) : g_h[1].host.mem_rd(a);
  endfunction

  int checks = 0, failures = 0;
  bit started = 0;

  // ------------------------------------------------------------------
  // front-end emulators
  // ------------------------------------------------------------------
  int fcnt = 0;
  logic fe_stb;
  always_ff @(posedge clk) fcnt <= (fcnt == FD - 1) ? 0 : fcnt + 1;
  assign fe_stb = (fcnt == FD - 1);

  logic [7:0]    fe_cnt [NL][EL];
  logic [NL-1:0] fe_dv, fe_wb;
  logic [GW-1:0] fe_word [NL];
  logic [GW-1:0] dly [NL][8];

  for (genvar l = 0; l < NL; l++) begin : g_fe
    logic [79:0] d;
    always_comb for (int e = 0; e < EL; e++) d[8*e +: 8] = fe_cnt[l][e];
    gbt_tx #(.GEAR_W(GW)) u_fe (.clk, .rst_n, .frame_stb(fe_stb), .widebus(fe_wb[l]),
      .data_valid(fe_dv[l]), .ic(2'b00), .ec(2'b00), .data(d), .wb_data(32'h0),
      .tx_word(fe_word[l]));
    always_ff @(posedge clk) begin
      dly[l][0] <= fe_word[l];
      for (int k = 1; k < 8; k++) dly[l][k] <= dly[l][k-1];
    end
    assign gbt_rx_word[l] = dly[l][l + 1];
  end

  always_ff @(posedge clk) begin
    if (fe_stb) begin
      for (int l = 0; l < NL; l++) begin
        if (fe_dv[l]) for (int e = 0; e < EL; e++) fe_cnt[l][e] <= fe_cnt[l][e] + 1'b1;
        fe_dv[l] <= ($urandom_range(0, 3) != 0);
      end
    end
  end

  // ------------------------------------------------------------------
  // front-end receiver on link 0 of set 1 (global link LPS)
  // ------------------------------------------------------------------
  logic        fr_stb, fr_dv, fr_locked;
  logic [1:0]  fr_ic, fr_ec;
  logic [79:0] fr_data;
  logic [31:0] fr_wb;
  logic [15:0] fr_chk, fr_slips;
  gbt_rx #(.GEAR_W(GW)) u_fr (.clk, .rst_n, .widebus(1'b0), .rx_word(gbt_tx_word[LPS]),
    .frame_stb(fr_stb), .data_valid(fr_dv), .ic(fr_ic), .ec(fr_ec), .data(fr_data),
    .wb_data(fr_wb), .locked(fr_locked), .check_errors(fr_chk), .slips(fr_slips));

  logic [7:0] fh_got [4][$];
  logic [7:0] fh_exp [4][$];
  bit fh_collect = 1;
  int ttc_l1a_rx = 0, ttc_bcr_rx = 0;
  always @(posedge clk) if (started && fr_stb) begin
    if (fr_data[7:0] != 0) begin
      if (fr_data[7]) ttc_l1a_rx++;
      if (fr_data[6]) ttc_bcr_rx++;
    end
    if (fh_collect)
      for (int e = 1; e < 4; e++) if (fr_data[8*e +: 8] != 0) fh_got[e].push_back(fr_data[8*e +: 8]);
  end

  // ------------------------------------------------------------------
  // TTC source: one A bit and one B bit per frame slot
  // ------------------------------------------------------------------
  int l1a_sent = 0, l1a_dec = 0, bcr_dec = 0;
  bit ttc_run = 0;
  logic bq[$];
  task automatic push_short(input logic [7:0] cmd);
    bq.push_back(0); bq.push_back(0);
    for (int i = 7; i >= 0; i--) bq.push_back(cmd[i]);
    for (int i = 0; i < 5; i++) bq.push_back(^(cmd >> i));
    bq.push_back(1);
  endtask
  initial begin
    ttc_bit = 1; ttc_bit_valid = 0;
    wait (ttc_run);
    forever begin
      logic a;
      a = ($urandom_range(0, 7) == 0);
      @(negedge clk); ttc_bit_valid = 1; ttc_bit = a; l1a_sent += int'(a);
      @(negedge clk); ttc_bit_valid = 0;
      @(negedge clk);
      if (bq.size() == 0 && $urandom_range(0, 15) == 0) push_short(8'h01);
      @(negedge clk); ttc_bit_valid = 1; ttc_bit = (bq.size() > 0) ? bq.pop_front() : 1'b1;
      @(negedge clk); ttc_bit_valid = 0;
      @(negedge clk);
    end
  end
  always @(posedge clk) if (started) begin
    if (dut.l1a) l1a_dec++;
    if (dut.bcr) bcr_dec++;
  end

  // ------------------------------------------------------------------
  // interrupts
  // ------------------------------------------------------------------
  int irqs [NS][8];
  initial foreach (irqs[s, v]) irqs[s][v] = 0;
  always @(posedge clk) for (int s = 0; s < NS; s++) begin
    msi_ack[s] <= 1'b0;
    if (started && msi_valid[s] && !msi_ack[s]) begin
      msi_ack[s] <= 1'b1;
      irqs[s][msi_vec[s]]++;
    end
  end

  // ------------------------------------------------------------------
  // register access
  // ------------------------------------------------------------------
  task automatic wr(input int s, input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); reg_wr[s] = 1; reg_addr[s] = a; reg_wdata[s] = d;
    @(negedge clk); reg_wr[s] = 0;
  endtask
  task automatic rd(input int s, input logic [7:0] a, output logic [63:0] d);
    @(negedge clk); reg_rd[s] = 1; reg_addr[s] = a;
    @(negedge clk); reg_rd[s] = 0;
    d = reg_rdata[s];
  endtask

  // ------------------------------------------------------------------
  // host software: to-host buffer check
  // ------------------------------------------------------------------
  localparam int BUF_WORDS = 64;
  longint tb_start [NS], tb_end [NS], rp [NS];
  int  exp_seq [NE], exp_byte [NE], pos [NE];
  bit  seen_e [NE], pos_ok [NE];
  int  blocks = 0, seq_gaps = 0, wraps = 0, wb_blocks = 0;
  bit  wb_on = 0;

  task automatic check_block(input int s, input logic [DATA_W-1:0] w);
    block_t b;
    int id, n;
    b = block_t'(w);
    id = int'(b.hdr.elink);
    n = int'(b.hdr.nbytes);
    blocks++;
    checks++;
    if (b.hdr.marker != BLK_MARKER || id < s * LPS * EL || id >= (s + 1) * LPS * EL ||
        n == 0 || n > BLK_BYTES) begin
      failures++; $display("bad block header %h", w[31:0]);
      return;
    end
    for (int k = 1; k < n; k++) begin
      if (b.payload[8*k +: 8] != 8'(b.payload[7:0] + k)) begin
        failures++; $display("E-link %0d: payload not consecutive", id); break;
      end
    end
    if (seen_e[id] && int'(b.hdr.seq) != exp_seq[id]) begin
      seq_gaps++;
      pos_ok[id] = 0;
    end else if (seen_e[id] && int'(b.payload[7:0]) != exp_byte[id]) begin
      failures++; $display("E-link %0d: byte %0d after %0d", id, b.payload[7:0], exp_byte[id]);
    end
    if (!seen_e[id]) begin pos[id] = 0; pos_ok[id] = 1; end
    if (pos_ok[id]) begin
      checks++;
      if (b.hdr.eoc != (pos[id] + n == 40)) begin
        failures++; $display("E-link %0d: end of chunk flag wrong", id);
      end
    end
    pos[id] = b.hdr.eoc ? 0 : pos[id] + n;
    if (b.hdr.eoc) pos_ok[id] = 1;
    seen_e[id] = 1;
    exp_seq[id] = (int'(b.hdr.seq) + 1) % (1 << SEQ_W);
    exp_byte[id] = (int'(b.payload[7:0]) + n) % 256;
    if (wb_on && id >= (NL - 1) * EL) wb_blocks++;
  endtask

  task automatic service(input int s);
    logic [63:0] cur;
    rd(s, 8'h03, cur);
    while (rp[s] != longint'(cur)) begin
      check_block(s, hrd(s, rp[s]));
      rp[s] += 32;
      if (rp[s] == tb_end[s]) begin rp[s] = tb_start[s]; wraps++; end
    end
    wr(s, 8'h03, 64'(rp[s]));
  endtask

  // ------------------------------------------------------------------
  // main sequence
  // ------------------------------------------------------------------
  localparam longint FB_START = 64'h80000;
  initial begin
    logic [63:0] v;
    int fh_blocks;
    busy_force = 0;
    fe_wb = '0;
    foreach (reg_wr[s]) begin
      reg_wr[s] = 0; reg_rd[s] = 0; reg_addr[s] = 0; reg_wdata[s] = 0;
    end
    foreach (fe_cnt[l, e]) fe_cnt[l][e] = 8'(37 * l + 11 * e);
    fe_dv = '1;
    foreach (seen_e[i]) begin seen_e[i] = 0; exp_seq[i] = 0; exp_byte[i] = 0; pos[i] = 0; pos_ok[i] = 0; end
    #1 rst_n = 0;
    @(negedge clk);
    repeat (3) @(negedge clk);
    rst_n = 1;
    started = 1;
    ttc_run = 1;
    // from-host data for set 1: 8 blocks to E-links 1..3 of its first link
    fh_blocks = 0;
    for (int k = 0; k < 8; k++) begin
      block_t b;
      int e;
      e = 1 + k % 3;
      b = '0;
      b.hdr.marker = BLK_MARKER;
      b.hdr.elink = ELINK_ID_W'(LPS * EL + e);
      b.hdr.nbytes = 5'd20;
      b.hdr.eoc = 1'b1;
      for (int j = 0; j < 20; j++) begin
        b.payload[8*j +: 8] = 8'(1 + (k * 20 + j) % 250);
        fh_exp[e].push_back(8'(1 + (k * 20 + j) % 250));
      end
      g_h[1].host.mem_wr(FB_START + 32 * k, b);
    end
    // descriptors: 0 circular to-host in both sets, 1 single-pass from-host in set 1
    for (int s = 0; s < NS; s++) begin
      tb_start[s] = 64'h10000 * (s + 1);
      tb_end[s] = tb_start[s] + 32 * BUF_WORDS;
      rp[s] = tb_start[s];
      wr(s, 8'h00, tb_start[s]); wr(s, 8'h01, tb_end[s]); wr(s, 8'h02, 64'h204);
    end
    wr(1, 8'h04, FB_START); wr(1, 8'h05, FB_START + 32 * 8); wr(1, 8'h06, 64'h104);
    wr(1, 8'h32, 64'h1);                 // TTC on E-link 0 of link 0
    for (int s = 0; s < NS; s++) wr(s, 8'h20, 64'h1);
    wait (fr_locked);
    wr(1, 8'h20, 64'h2);                 // from-host once the front end listens
    // slow host: nobody reads the to-host buffers for a while
    repeat (2500) @(negedge clk);
    // host keeps up; wide-bus on the last link half way
    for (int it = 0; it < 700; it++) begin
      for (int s = 0; s < NS; s++) service(s);
      if (it == 300) begin
        wr(1, 8'h33, 64'(1 << (LPS - 1)));
        fe_wb[NL - 1] = 1;
        wb_on = 1;
      end
    end
    // from-host results
    fh_collect = 0;
    for (int e = 1; e < 4; e++) begin
      checks++;
      if (fh_got[e] != fh_exp[e]) begin
        failures++; $display("from-host E-link %0d: got %0d bytes, want %0d", e, fh_got[e].size(), fh_exp[e].size());
      end
    end
    // second from-host pass with a wrong completion length
    g_h[1].host.bad_len_once = 1;
    wr(1, 8'h20, 64'h2);
    repeat (400) @(negedge clk);
    rd(1, 8'h48, v);
    checks++;
    if (v != 1) begin failures++; $display("length errors %0d", v); end
    // lock state and monitors
    for (int s = 0; s < NS; s++) begin
      rd(s, 8'h43, v);
      checks++;
      if (v != 64'((1 << LPS) - 1)) begin failures++; $display("set %0d locked mask %h", s, v); end
    end
    // BUSY override
    @(negedge clk) busy_force = 1;
    @(negedge clk);
    checks++;
    if (!busy_out) begin failures++; $display("busy_force ignored"); end
    busy_force = 0;
    checks++;
    if (ttc_frame_errors != 0) begin failures++; $display("TTC frame errors %0d", ttc_frame_errors); end
    checks++;
    if (l1a_dec != l1a_sent) begin failures++; $display("L1A sent %0d decoded %0d", l1a_sent, l1a_dec); end

    // mechanism counts
    begin
      int full_stalls, overflows, slips, ttc_frames;
      rd(0, 8'h49, v); full_stalls = int'(v);
      rd(1, 8'h49, v); full_stalls += int'(v);
      rd(0, 8'h40, v); overflows = int'(v);
      rd(1, 8'h40, v); overflows += int'(v);
      rd(1, 8'h42, v); ttc_frames = int'(v);
      slips = int'(dut.g_set[0].u_set.g_link[0].u_rx.slips) + int'(dut.g_set[0].u_set.g_link[1].u_rx.slips)
            + int'(dut.g_set[1].u_set.g_link[0].u_rx.slips) + int'(dut.g_set[1].u_set.g_link[1].u_rx.slips);
      $display("blocks checked      %0d", blocks);
      $display("DMA full stalls     %0d", full_stalls);
      $display("buffer wraps        %0d", wraps);
      $display("block overflows     %0d (sequence gaps seen %0d)", overflows, seq_gaps);
      $display("BUSY asserts        %0d", busy_asserts);
      $display("word slips          %0d", slips);
      $display("L1A decoded         %0d, forwarded %0d", l1a_dec, ttc_l1a_rx);
      $display("BCR decoded         %0d, forwarded %0d", bcr_dec, ttc_bcr_rx);
      $display("TTC frames          %0d", ttc_frames);
      $display("wide-bus blocks     %0d", wb_blocks);
      $display("from-host bytes     %0d", fh_got[1].size() + fh_got[2].size() + fh_got[3].size());
      $display("interrupts          set0 %0d, set1 done %0d", irqs[0][0], irqs[1][1]);
      checks += 12;
      if (blocks == 0)       begin failures++; $display("no blocks"); end
      if (full_stalls == 0)  begin failures++; $display("no full stall"); end
      if (wraps == 0)        begin failures++; $display("no wrap"); end
      if (overflows == 0 || seq_gaps == 0) begin failures++; $display("no overflow"); end
      if (busy_asserts == 0) begin failures++; $display("no BUSY"); end
      if (slips == 0)        begin failures++; $display("no word slip"); end
      if (ttc_l1a_rx == 0)   begin failures++; $display("no L1A forwarded"); end
      if (ttc_bcr_rx == 0)   begin failures++; $display("no BCR forwarded"); end
      if (ttc_frames == 0)   begin failures++; $display("no TTC frame"); end
      if (wb_blocks == 0)    begin failures++; $display("no wide-bus data"); end
      if (irqs[0][0] == 0)   begin failures++; $display("no to-host interrupt"); end
      if (irqs[1][1] == 0)   begin failures++; $display("no from-host interrupt"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
