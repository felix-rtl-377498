// tb_felix_set: one firmware set with 2 GBT links and 16-word FIFOs.
// Front-end GBT transmitters send a counting byte stream on all 8 E-links
// of each link, through channels of different delay. The host software
// (testbench) programs a circular to-host descriptor and a single-pass
// from-host descriptor through the register port, follows the to-host
// buffer and checks that every block holds consecutive bytes continuing the
// previous block of its E-link. A GBT receiver on link 1's transmit words
// checks the from-host bytes sent to E-link 2 of link 1, and the TTC byte
// (L1A pulses driven at the set's input) on E-link 0. The monitor registers
// must show both links locked and no GBT check errors.
module tb_felix_set;
  import felix_pkg::*;
  localparam int L = 2, EL = 8, GW = 20, D = 16;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse

  logic frame_stb;
  logic [GW-1:0] rx_word [L], tx_word [L];
  logic l1a, bcr, ecr, brcst_valid;
  logic [7:0] brcst;
  logic reg_wr, reg_rd, reg_rvalid;
  logic [7:0] reg_addr;
  logic [63:0] reg_wdata, reg_rdata;
  logic [DATA_W-1:0] rq_data, rc_data;
  logic rq_valid, rq_last, rq_ready, rc_valid, rc_last, rc_ready;
  logic msi_valid, msi_ack;
  logic [2:0] msi_vec;
  logic [$clog2(D):0] th_level;

  felix_set #(.LINKS(L), .ELINKS(EL), .GEAR_W(GW), .FIFO_DEPTH(D), .ID_BASE(0)) dut (.*);
  pcie_host_model #(.STALL(1)) host (.clk, .rst_n, .rq_data, .rq_valid, .rq_last, .rq_ready,
                                     .rc_data, .rc_valid, .rc_last, .rc_ready);

  int checks = 0, failures = 0;
  bit started = 0;
  int fcnt = 0;
  always_ff @(posedge clk) fcnt <= (fcnt == 5) ? 0 : fcnt + 1;
  assign frame_stb = (fcnt == 5);

  // front ends
  logic [7:0] fe_cnt [L];
  logic [GW-1:0] fe_word [L];
  logic [GW-1:0] dly [L][4];
  for (genvar l = 0; l < L; l++) begin : g_fe
    gbt_tx #(.GEAR_W(GW)) u_fe (.clk, .rst_n, .frame_stb, .widebus(1'b0), .data_valid(1'b1),
      .ic(2'b00), .ec(2'b00), .data({10{fe_cnt[l]}}), .wb_data(32'h0), .tx_word(fe_word[l]));
    always_ff @(posedge clk) begin
      dly[l][0] <= fe_word[l];
      for (int k = 1; k < 4; k++) dly[l][k] <= dly[l][k-1];
      if (frame_stb) fe_cnt[l] <= fe_cnt[l] + 1'b1;
    end
    assign rx_word[l] = dly[l][2 * l + 1];
  end

  // receiver on link 1's transmit side
  logic fr_stb, fr_dv, fr_locked;
  logic [1:0] fr_ic, fr_ec;
  logic [79:0] fr_data;
  logic [31:0] fr_wb;
  logic [15:0] fr_chk, fr_slips;
  gbt_rx #(.GEAR_W(GW)) u_fr (.clk, .rst_n, .widebus(1'b0), .rx_word(tx_word[1]),
    .frame_stb(fr_stb), .data_valid(fr_dv), .ic(fr_ic), .ec(fr_ec), .data(fr_data),
    .wb_data(fr_wb), .locked(fr_locked), .check_errors(fr_chk), .slips(fr_slips));
  logic [7:0] got[$];
  int l1a_in = 0, l1a_out = 0;
  always @(posedge clk) if (started) begin
    if (fr_stb && fr_data[23:16] != 0) got.push_back(fr_data[23:16]);
    if (fr_stb && fr_data[7]) l1a_out++;
    if (l1a) l1a_in++;
    msi_ack <= msi_valid && !msi_ack;
  end

  task automatic wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_wr = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [63:0] d);
    @(negedge clk); reg_rd = 1; reg_addr = a;
    @(negedge clk); reg_rd = 0;
    d = reg_rdata;
  endtask

  int nxt [L*EL];
  bit seen [L*EL];
  int blocks = 0;
  localparam longint TS = 64'h2000, TE = 64'h2000 + 32 * 32, FS = 64'h9000;

  initial begin
    logic [63:0] v, cur;
    longint rp;
    logic [7:0] want[$];
    l1a = 0; bcr = 0; ecr = 0; brcst_valid = 0; brcst = 0; msi_ack = 0;
    reg_wr = 0; reg_rd = 0; reg_addr = 0; reg_wdata = 0;
    foreach (fe_cnt[l]) fe_cnt[l] = 8'(100 * l);
    foreach (seen[i]) begin seen[i] = 0; nxt[i] = 0; end
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    started = 1;
    for (int k = 0; k < 4; k++) begin
      block_t b;
      b = '0;
      b.hdr.marker = BLK_MARKER; b.hdr.elink = ELINK_ID_W'(EL + 2); b.hdr.nbytes = 5'd25; b.hdr.eoc = 1;
      for (int j = 0; j < 25; j++) begin
        b.payload[8*j +: 8] = 8'(1 + k * 25 + j);
        want.push_back(8'(1 + k * 25 + j));
      end
      host.mem_wr(FS + 32 * k, b);
    end
    wr(8'h00, TS); wr(8'h01, TE); wr(8'h02, 64'h202);
    wr(8'h04, FS); wr(8'h05, FS + 32 * 4); wr(8'h06, 64'h102);
    wr(8'h32, 64'h2);
    wr(8'h20, 64'h1);
    wait (fr_locked);
    wr(8'h20, 64'h2);
    rp = TS;
    for (int it = 0; it < 600; it++) begin
      if (it % 4 == 0) begin
        @(negedge clk) l1a = ($urandom_range(0, 1) == 0);
        @(negedge clk) l1a = 0;
        repeat (6) @(negedge clk);
      end
      rd(8'h03, cur);
      while (rp != longint'(cur)) begin
        block_t b;
        int id, n;
        b = block_t'(host.mem_rd(rp));
        id = int'(b.hdr.elink); n = int'(b.hdr.nbytes);
        blocks++;
        checks++;
        if (b.hdr.marker != BLK_MARKER || id >= L * EL || n == 0 || n > BLK_BYTES) begin
          failures++; $display("bad header %h", b.hdr);
        end else begin
          if (seen[id] && b.payload[7:0] != 8'(nxt[id])) begin failures++; $display("E-link %0d gap", id); end
          for (int k = 1; k < n; k++)
            if (b.payload[8*k +: 8] != 8'(b.payload[7:0] + k)) begin failures++; $display("E-link %0d bytes", id); break; end
          seen[id] = 1;
          nxt[id] = (int'(b.payload[7:0]) + n) % 256;
        end
        rp += 32;
        if (rp == TE) rp = TS;
      end
      wr(8'h03, 64'(rp));
    end
    checks++;
    if (got != want) begin failures++; $display("from-host bytes %0d want %0d", got.size(), want.size()); end
    checks++;
    if (l1a_in == 0 || l1a_out != l1a_in) begin failures++; $display("L1A in %0d out %0d", l1a_in, l1a_out); end
    rd(8'h43, v); checks++; if (v != 3) begin failures++; $display("locked %h", v); end
    rd(8'h44, v); checks++; if (v != 0) begin failures++; $display("check errors %0d", v); end
    rd(8'h40, v); checks++; if (v != 0) begin failures++; $display("overflows %0d", v); end
    checks++;
    if (blocks < 100) begin failures++; $display("only %0d blocks", blocks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #300000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
