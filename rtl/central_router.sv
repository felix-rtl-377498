// central_router: routes E-link data between the GBT links of one firmware
// set and the DMA engine's FIFOs.
//
// To-host: each link's received 80-bit data field is split into ELINKS
// E-links of 8 bits (E-link e in bits [8e+7:8e], 320 Mb/s at the 40 MHz
// frame rate) and handed to cr_tohost, which packs chunks into blocks and
// writes them into the ToHost FIFO. Only frames with a data header and
// links enabled in elink_en contribute bytes.
// From-host: cr_fromhost distributes FromHost FIFO blocks over the E-links;
// ttc_fanout merges those bytes with the TTC byte into each link's transmit
// field.
// E-link numbers are ID_BASE + link*ELINKS + e.
// Follows the paper: to-host, from-host, TTC fan-out and transmit mux of
// the Central Router. Own choices: see the three sub-blocks.
module central_router
  import felix_pkg::*;
#(
  parameter int unsigned LINKS   = 12,
  parameter int unsigned ELINKS  = 8,
  parameter int unsigned ID_BASE = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic [15:0]        chunk_size,
  input  logic [LINKS-1:0]   elink_en,
  input  logic [LINKS-1:0]   ttc_sel,
  // GBT receive side
  input  logic [LINKS-1:0]   rx_stb,
  input  logic [LINKS-1:0]   rx_dvalid,
  input  logic [79:0]        rx_data [LINKS],
  // GBT transmit side
  input  logic               frame_stb,
  output logic [79:0]        tx_data [LINKS],
  output logic [LINKS-1:0]   tx_dvalid,
  // TTC
  input  logic               l1a,
  input  logic               bcr,
  input  logic               ecr,
  input  logic               brcst_valid,
  input  logic [7:0]         brcst,
  // FIFOs
  output logic               th_wr,
  output block_t             th_data,
  input  logic               th_full,
  input  logic               fh_empty,
  input  block_t             fh_data,
  output logic               fh_rd,
  // monitors
  output logic [31:0]        overflows,
  output logic [15:0]        fh_errors,
  output logic [31:0]        ttc_frames
);

  localparam int unsigned N = LINKS * ELINKS;

  logic [N-1:0] bv;
  logic [7:0]   bytes   [N];
  logic [7:0]   fh_byte [N];
  logic [N-1:0] fh_valid;
  logic [7:0]   ttc_byte;

  always_comb begin
    for (int l = 0; l < LINKS; l++) begin
      for (int e = 0; e < ELINKS; e++) begin
        bv[l*ELINKS + e]    = rx_stb[l] && rx_dvalid[l] && elink_en[l];
        bytes[l*ELINKS + e] = rx_data[l][8*e +: 8];
      end
    end
  end

  cr_tohost #(.NUM_ELINKS(N), .ID_BASE(ID_BASE)) u_tohost (
    .clk, .rst_n, .chunk_size, .byte_valid(bv), .byte_in(bytes),
    .fifo_wr(th_wr), .fifo_data(th_data), .fifo_full(th_full),
    .total_overflows(overflows)
  );

  cr_fromhost #(.NUM_ELINKS(N), .ID_BASE(ID_BASE)) u_fromhost (
    .clk, .rst_n, .fifo_empty(fh_empty), .fifo_data(fh_data), .fifo_rd(fh_rd),
    .frame_stb, .tx_byte(fh_byte), .tx_valid(fh_valid), .errors(fh_errors)
  );

  ttc_fanout #(.LINKS(LINKS), .ELINKS(ELINKS)) u_ttc (
    .clk, .rst_n, .frame_stb, .l1a, .bcr, .ecr, .brcst_valid, .brcst,
    .ttc_sel, .fh_byte, .fh_valid, .tx_data, .tx_dvalid, .ttc_byte, .ttc_frames
  );

endmodule
