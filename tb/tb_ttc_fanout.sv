// tb_ttc_fanout: drives TTC pulses at random cycles between frame strobes
// and random from-host bytes, and checks for every frame that links with
// TTC select carry the expected TTC byte on E-link 0, that all other
// E-link slots carry their from-host bytes, and that the data-valid flag
// follows. The TTC byte must appear exactly one frame after the pulses.
module tb_ttc_fanout;
  localparam int L = 3, E = 8;
  logic clk = 0, rst_n = 1;
  initial begin #4; forever #1 clk = ~clk; end  // first edge after the reset pulse
  logic fstb, l1a, bcr, ecr, bv;
  logic [7:0] brcst, tbyte;
  logic [L-1:0] sel, dv;
  logic [7:0] fh [L*E];
  logic [L*E-1:0] fv;
  logic [79:0] txd [L];
  logic [31:0] tf;
  ttc_fanout #(.LINKS(L), .ELINKS(E)) dut (.clk, .rst_n, .frame_stb(fstb), .l1a, .bcr, .ecr,
    .brcst_valid(bv), .brcst, .ttc_sel(sel), .fh_byte(fh), .fh_valid(fv), .tx_data(txd),
    .tx_dvalid(dv), .ttc_byte(tbyte), .ttc_frames(tf));
  int checks = 0, failures = 0, nz = 0;
  logic [7:0] acc, expb;

  initial begin
    fstb = 0; l1a = 0; bcr = 0; ecr = 0; bv = 0; brcst = 0; sel = 3'b101; fv = '0;
    foreach (fh[i]) fh[i] = 0;
    #1 rst_n = 0;
    @(negedge clk);
    @(negedge clk) rst_n = 1;
    acc = 0;
    for (int f = 0; f < 300; f++) begin
      for (int c = 0; c < 6; c++) begin
        @(negedge clk);
        l1a = ($urandom_range(0, 30) == 0);
        bcr = ($urandom_range(0, 60) == 0);
        ecr = 0;
        bv  = bcr;
        brcst = bcr ? 8'h01 : 8'h00;
        fstb = (c == 5);
        acc |= {l1a, bcr, ecr, bv, 4'b0};
      end
      @(negedge clk);
      fstb = 0; l1a = 0; bcr = 0; bv = 0;
      expb = acc;
      if (acc != 0) nz++;
      acc = 0;
      foreach (fh[i]) fh[i] = $urandom;
      foreach (fv[i]) fv[i] = ($urandom_range(0, 1) == 1);
      #0;
      checks++;
      if (tbyte != expb) begin failures++; $display("frame %0d ttc %h exp %h", f, tbyte, expb); end
      for (int l = 0; l < L; l++) begin
        logic [79:0] e;
        logic edv;
        e = '0; edv = 0;
        for (int k = 0; k < E; k++) begin
          if (k == 0 && sel[l]) begin e[7:0] = expb; edv |= (expb != 0); end
          else begin e[8*k +: 8] = fh[l*E+k]; edv |= fv[l*E+k]; end
        end
        checks++;
        if (txd[l] != e || dv[l] != edv) begin failures++; $display("link %0d mux wrong", l); end
      end
    end
    checks++;
    if (tf != 32'(nz)) begin failures++; $display("ttc_frames %0d exp %0d", tf, nz); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
