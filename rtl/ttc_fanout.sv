// ttc_fanout: TTC data fan-out and the transmit multiplexer of the Central
// Router.
//
// TTC pulses from the decoder (L1A, BCR, ECR, broadcast strobe and the low
// broadcast bits) are collected between two frame strobes and, at a strobe,
// stored as one TTC byte {l1a, bcr, ecr, brcst_valid, brcst[5:2]}. For each
// GBT link a multiplexer then builds the 80-bit transmit data field: E-link
// e occupies bits [8e+7:8e]; on links whose ttc_sel bit is set, E-link 0
// carries the TTC byte instead of from-host data. Bits above the last
// E-link are zero. dvalid asks the GBT transmitter for a data header when
// the field carries anything.
// Timing: a TTC pulse at cycle t enters the byte stored at the first frame
// strobe at or after t, and goes out in the frame sent at the following
// strobe, so the latency in frames is fixed.
// Follows the paper: TTC fan-out muxed with from-host data into the GBT
// transmitter, at fixed latency. Own choices: the byte encoding, the
// E-link 0 position, the per-link select register.
module ttc_fanout #(
  parameter int unsigned LINKS  = 12,
  parameter int unsigned ELINKS = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     frame_stb,
  input  logic                     l1a,
  input  logic                     bcr,
  input  logic                     ecr,
  input  logic                     brcst_valid,
  input  logic [7:0]               brcst,
  input  logic [LINKS-1:0]         ttc_sel,
  input  logic [7:0]               fh_byte  [LINKS*ELINKS],
  input  logic [LINKS*ELINKS-1:0]  fh_valid,
  output logic [79:0]              tx_data  [LINKS],
  output logic [LINKS-1:0]         tx_dvalid,
  output logic [7:0]               ttc_byte,
  output logic [31:0]              ttc_frames
);

  logic [7:0] acc_q;
  logic [7:0] now;

  assign now = {l1a, bcr, ecr, brcst_valid, (brcst_valid ? brcst[5:2] : 4'b0)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q      <= '0;
      ttc_byte   <= '0;
      ttc_frames <= '0;
    end else if (frame_stb) begin
      ttc_byte <= acc_q | now;
      acc_q    <= '0;
      if ((acc_q | now) != 0) ttc_frames <= ttc_frames + 1'b1;
    end else begin
      acc_q <= acc_q | now;
    end
  end

  always_comb begin
    for (int l = 0; l < LINKS; l++) begin
      tx_data[l]   = '0;
      tx_dvalid[l] = 1'b0;
      for (int e = 0; e < ELINKS; e++) begin
        if (e == 0 && ttc_sel[l]) begin
          tx_data[l][7:0] = ttc_byte;
          tx_dvalid[l]    = tx_dvalid[l] | (ttc_byte != 0);
        end else begin
          tx_data[l][8*e +: 8] = fh_byte[l*ELINKS + e];
          tx_dvalid[l]         = tx_dvalid[l] | fh_valid[l*ELINKS + e];
        end
      end
    end
  end

  initial assert (ELINKS * 8 <= 80) else $error("too many E-links for the 80-bit field");

endmodule
