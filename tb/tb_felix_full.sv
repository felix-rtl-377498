// tb_felix_full: the FELIX card at its full default size (2 sets of 12 GBT
// links, 8 E-links per link, 512-word FIFOs), taken through one complete
// to-host operation. Front-end GBT transmitters feed a counting byte stream
// on every E-link of the first and the last link of each set (the other
// links receive nothing and stay unlocked); the host software sets up a
// circular to-host descriptor per set, follows both buffers and checks every
// block: valid header, E-link within its set, consecutive bytes that
// continue the previous block of the same E-link. It also runs one
// from-host block to E-link 1 of link 0 of set 0 and checks it on that
// link's transmit side, and sends L1A pulses on the TTC input.
module tb_felix_full;
  import felix_pkg::*;
  localparam int NS = 2, LPS = 12, EL = 8, NL = NS * LPS, GW = 20;

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

  felix_top dut (.*);

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
  int fcnt = 0;
  logic fe_stb;
  always_ff @(posedge clk) fcnt <= (fcnt == 5) ? 0 : fcnt + 1;
  assign fe_stb = (fcnt == 5);

  // front ends on links 0 and LPS-1 of each set
  logic [7:0] fe_cnt [NL];
  for (genvar l = 0; l < NL; l++) begin : g_fe
    if (l % LPS == 0 || l % LPS == LPS - 1) begin : g_on
      logic [GW-1:0] w, d1, d2;
      gbt_tx #(.GEAR_W(GW)) u_fe (.clk, .rst_n, .frame_stb(fe_stb), .widebus(1'b0),
        .data_valid(1'b1), .ic(2'b00), .ec(2'b00), .data({10{fe_cnt[l]}}), .wb_data(32'h0),
        .tx_word(w));
      always_ff @(posedge clk) begin
        d1 <= w; d2 <= d1;
        if (fe_stb) fe_cnt[l] <= fe_cnt[l] + 1'b1;
      end
      assign gbt_rx_word[l] = d2;
    end else begin : g_off
      assign gbt_rx_word[l] = '0;
    end
  end

  // receiver on link 0's transmit side
  logic fr_stb, fr_dv, fr_locked;
  logic [1:0] fr_ic, fr_ec;
  logic [79:0] fr_data;
  logic [31:0] fr_wb;
  logic [15:0] fr_chk, fr_slips;
  gbt_rx #(.GEAR_W(GW)) u_fr (.clk, .rst_n, .widebus(1'b0), .rx_word(gbt_tx_word[0]),
    .frame_stb(fr_stb), .data_valid(fr_dv), .ic(fr_ic), .ec(fr_ec), .data(fr_data),
    .wb_data(fr_wb), .locked(fr_locked), .check_errors(fr_chk), .slips(fr_slips));
  logic [7:0] got[$];
  int l1a_in = 0;
  always @(posedge clk) if (started) begin
    if (fr_stb && fr_data[15:8] != 0) got.push_back(fr_data[15:8]);
    if (dut.l1a) l1a_in++;
    for (int s = 0; s < NS; s++) msi_ack[s] <= msi_valid[s] && !msi_ack[s];
  end

  task automatic wr(input int s, input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); reg_wr[s] = 1; reg_addr[s] = a; reg_wdata[s] = d;
    @(negedge clk); reg_wr[s] = 0;
  endtask
  task automatic rd(input int s, input logic [7:0] a, output logic [63:0] d);
    @(negedge clk); reg_rd[s] = 1; reg_addr[s] = a;
    @(negedge clk); reg_rd[s] = 0;
    d = reg_rdata[s];
  endtask

  int nxt [NL*EL];
  bit seen [NL*EL];
  int blocks = 0;
  longint ts [NS], te [NS], rp [NS];
  localparam longint FS = 64'h90000;

  initial begin
    logic [63:0] v, cur;
    logic [7:0] want[$];
    block_t fb;
    int l1a_sent;
    ttc_bit = 1; ttc_bit_valid = 0; busy_force = 0;
    foreach (reg_wr[s]) begin reg_wr[s] = 0; reg_rd[s] = 0; reg_addr[s] = 0; reg_wdata[s] = 0; msi_ack[s] = 0; end
    foreach (fe_cnt[l]) fe_cnt[l] = 8'(l * 9);
    foreach (seen[i]) begin seen[i] = 0; nxt[i] = 0; end
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    started = 1;
    fb = '0;
    fb.hdr.marker = BLK_MARKER; fb.hdr.elink = 11'd1; fb.hdr.nbytes = 5'd28; fb.hdr.eoc = 1;
    for (int j = 0; j < 28; j++) begin fb.payload[8*j +: 8] = 8'(j + 1); want.push_back(8'(j + 1)); end
    g_h[0].host.mem_wr(FS, fb);
    for (int s = 0; s < NS; s++) begin
      ts[s] = 64'h100000 * (s + 1); te[s] = ts[s] + 32 * 256; rp[s] = ts[s];
      wr(s, 8'h00, ts[s]); wr(s, 8'h01, te[s]); wr(s, 8'h02, 64'h208);
      wr(s, 8'h20, 64'h1);
    end
    wr(0, 8'h04, FS); wr(0, 8'h05, FS + 32); wr(0, 8'h06, 64'h101);
    wait (fr_locked);
    wr(0, 8'h20, 64'h2);
    l1a_sent = 0;
    for (int it = 0; it < 150; it++) begin
      // one L1A on the A channel, then an idle B bit
      @(negedge clk); ttc_bit_valid = 1; ttc_bit = (it % 3 == 0); l1a_sent += int'(it % 3 == 0);
      @(negedge clk); ttc_bit_valid = 1; ttc_bit = 1;
      @(negedge clk); ttc_bit_valid = 0;
      for (int s = 0; s < NS; s++) begin
        rd(s, 8'h03, cur);
        while (rp[s] != longint'(cur)) begin
          block_t b;
          int id, n;
          b = block_t'(hrd(s, rp[s]));
          id = int'(b.hdr.elink); n = int'(b.hdr.nbytes);
          blocks++;
          checks++;
          if (b.hdr.marker != BLK_MARKER || id < s * LPS * EL || id >= (s + 1) * LPS * EL ||
              n == 0 || n > BLK_BYTES) begin
            failures++; $display("bad header %h", b.hdr);
          end else begin
            if (seen[id] && b.payload[7:0] != 8'(nxt[id])) begin failures++; $display("E-link %0d gap", id); end
            for (int k = 1; k < n; k++)
              if (b.payload[8*k +: 8] != 8'(b.payload[7:0] + k)) begin failures++; $display("E-link %0d bytes", id); break; end
            seen[id] = 1;
            nxt[id] = (int'(b.payload[7:0]) + n) % 256;
          end
          rp[s] += 32;
          if (rp[s] == te[s]) rp[s] = ts[s];
        end
        wr(s, 8'h03, 64'(rp[s]));
      end
    end
    checks++;
    if (got != want) begin failures++; $display("from-host bytes %0d", got.size()); end
    checks++;
    if (l1a_in != l1a_sent) begin failures++; $display("L1A sent %0d decoded %0d", l1a_sent, l1a_in); end
    for (int s = 0; s < NS; s++) begin
      rd(s, 8'h43, v);
      checks++;
      if (v != 64'(1 | (1 << (LPS - 1)))) begin failures++; $display("set %0d locked %h", s, v); end
    end
    checks++;
    if (blocks < 200) begin failures++; $display("only %0d blocks", blocks); end
    $display("blocks checked %0d", blocks);
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
