// tb_wupper_regs: checks the register map: descriptor writes are decoded
// into index, field and data; writes to 0x20 pulse the enables; the
// configuration registers reset to their documented values and read back
// what was written; current addresses and monitors read back with one
// cycle of latency; unmapped addresses read zero.
module tb_wupper_regs;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse
  logic wr, rd, rv;
  logic [7:0] a;
  logic [63:0] wd, rdat;
  logic dwr;
  logic [2:0] didx;
  logic [1:0] dfield;
  logic [63:0] dwdata;
  logic [7:0] en_set, enabled, done, irqm;
  logic [63:0] cur [8];
  logic [15:0] chunk;
  logic [3:0] een, tsel, wb;
  logic [63:0] mon [16];
  wupper_regs #(.NUM_DESC(8), .LINKS(4)) dut (.clk, .rst_n, .reg_wr(wr), .reg_rd(rd), .reg_addr(a),
    .reg_wdata(wd), .reg_rdata(rdat), .reg_rvalid(rv), .desc_wr(dwr), .desc_idx(didx),
    .desc_field(dfield), .desc_wdata(dwdata), .enable_set(en_set), .enabled, .done, .cur_addr(cur),
    .irq_mask(irqm), .chunk_size(chunk), .elink_en(een), .ttc_sel(tsel), .widebus(wb), .mon);
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic rread(input logic [7:0] ad, output logic [63:0] d);
    @(negedge clk); rd = 1; a = ad;
    @(negedge clk); rd = 0;
    check(rv == 1, "rvalid");
    d = rdat;
  endtask

  initial begin
    logic [63:0] v;
    wr = 0; rd = 0; a = 0; wd = 0;
    enabled = 8'h5A; done = 8'h81;
    foreach (cur[i]) cur[i] = 64'h1000 * (i + 1);
    foreach (mon[i]) mon[i] = 64'hABC0 + 64'(i);
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    check(chunk == 40 && een == 4'hF && tsel == 0 && wb == 0 && irqm == 8'hFF, "reset values");
    for (int d = 0; d < 8; d++) for (int f = 0; f < 4; f++) begin
      @(negedge clk); wr = 1; a = 8'(4 * d + f); wd = {$urandom, $urandom};
      #0;
      check(dwr && didx == 3'(d) && dfield == 2'(f) && dwdata == wd, "descriptor decode");
      check(en_set == 0, "no enable on descriptor write");
    end
    @(negedge clk); wr = 1; a = 8'h20; wd = 64'h0C; #0;
    check(en_set == 8'h0C && !dwr, "enable pulse");
    @(negedge clk); wr = 1; a = 8'h30; wd = 64'd57;
    @(negedge clk); wr = 1; a = 8'h32; wd = 64'h5;
    @(negedge clk); wr = 1; a = 8'h22; wd = 64'h3;
    @(negedge clk); wr = 0; #0;
    check(en_set == 0, "enable is a pulse");
    check(chunk == 57 && tsel == 4'h5 && irqm == 8'h3, "config written");
    rread(8'h30, v); check(v == 57, "chunk read");
    rread(8'h20, v); check(v == 64'h5A, "enabled read");
    rread(8'h21, v); check(v == 64'h81, "done read");
    for (int d = 0; d < 8; d++) begin
      rread(8'(4 * d + 3), v); check(v == 64'h1000 * (d + 1), "cur_addr read");
    end
    for (int m = 0; m < 16; m++) begin
      rread(8'h40 + 8'(m), v); check(v == 64'hABC0 + 64'(m), "monitor read");
    end
    rread(8'h7F, v); check(v == 0, "unmapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
