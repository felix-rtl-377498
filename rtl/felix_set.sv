// felix_set: one of the two identical halves of the FELIX firmware, serving
// one 8-lane PCIe endpoint.
//
// For each of LINKS GBT links it has a transmitter (gbt_tx), a receiver
// (gbt_rx) and a PRBS-31 checker on the raw receive words. The Central
// Router connects the links' 80-bit data fields to a 256-bit ToHost FIFO
// and from a 256-bit FromHost FIFO; the Wupper DMA engine moves the FIFO
// contents to and from host memory over the PCIe streams.
// Data path to the host: transceiver words -> gbt_rx -> E-link bytes ->
// block packers -> ToHost FIFO -> DMA write requests.
// Data path from the host: DMA read completions -> FromHost FIFO -> E-link
// buffers -> TTC/from-host multiplexer -> gbt_tx -> transceiver words.
// frame_stb marks the 40 MHz frame slots and must pulse every 120/GEAR_W
// cycles.
// Monitor registers 0x40.. of this set: 0 block overflows, 1 from-host
// block errors, 2 frames carrying TTC, 3 GBT locked mask, 4 GBT check
// errors, 5 PRBS bit errors, 6 PRBS locked mask, 7 cycles ToHost FIFO full.
// Wide-bus mode (register bit per link) applies to the receive direction
// only; the transmit direction always uses GBT frame mode with its error
// check, as the paper gives up the FEC only in the to-host direction.
// Follows the paper: the set structure of GBT wrapper, Central Router and
// Wupper in the published firmware block diagram. Own choices: FIFO depth,
// monitor selection, the PRBS checker placement.
module felix_set
  import felix_pkg::*;
#(
  parameter int unsigned LINKS      = 12,
  parameter int unsigned ELINKS     = 8,
  parameter int unsigned GEAR_W     = 20,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned ID_BASE    = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     frame_stb,
  // transceivers
  input  logic [GEAR_W-1:0]        rx_word [LINKS],
  output logic [GEAR_W-1:0]        tx_word [LINKS],
  // TTC
  input  logic                     l1a,
  input  logic                     bcr,
  input  logic                     ecr,
  input  logic                     brcst_valid,
  input  logic [7:0]               brcst,
  // PCIe endpoint
  input  logic                     reg_wr,
  input  logic                     reg_rd,
  input  logic [7:0]               reg_addr,
  input  logic [63:0]              reg_wdata,
  output logic [63:0]              reg_rdata,
  output logic                     reg_rvalid,
  output logic [DATA_W-1:0]        rq_data,
  output logic                     rq_valid,
  output logic                     rq_last,
  input  logic                     rq_ready,
  input  logic [DATA_W-1:0]        rc_data,
  input  logic                     rc_valid,
  input  logic                     rc_last,
  output logic                     rc_ready,
  output logic                     msi_valid,
  output logic [2:0]               msi_vec,
  input  logic                     msi_ack,
  // to the busy logic
  output logic [$clog2(FIFO_DEPTH):0] th_level
);

  localparam int unsigned AW = $clog2(FIFO_DEPTH);

  // GBT links
  logic [LINKS-1:0] rx_stb, rx_dv, locked, prbs_locked, tx_dv;
  logic [79:0]      rx_data [LINKS];
  logic [79:0]      tx_data [LINKS];
  logic [15:0]      chk_err [LINKS];
  logic [31:0]      prbs_err[LINKS];
  logic [15:0]      chunk_size;
  logic [LINKS-1:0] elink_en, ttc_sel, widebus;

  for (genvar l = 0; l < LINKS; l++) begin : g_link
    logic [1:0]  ric, rec;
    logic [31:0] rwb;
    logic [15:0] slips;
    logic [31:0] pwords;
    gbt_tx #(.GEAR_W(GEAR_W)) u_tx (
      .clk, .rst_n, .frame_stb, .widebus(1'b0), .data_valid(tx_dv[l]),
      .ic(2'b11), .ec(2'b11), .data(tx_data[l]), .wb_data(32'h0), .tx_word(tx_word[l])
    );
    gbt_rx #(.GEAR_W(GEAR_W)) u_rx (
      .clk, .rst_n, .widebus(widebus[l]), .rx_word(rx_word[l]), .frame_stb(rx_stb[l]),
      .data_valid(rx_dv[l]), .ic(ric), .ec(rec), .data(rx_data[l]), .wb_data(rwb),
      .locked(locked[l]), .check_errors(chk_err[l]), .slips
    );
    prbs31_checker #(.W(GEAR_W)) u_prbs (
      .clk, .rst_n, .valid(1'b1), .data(rx_word[l]), .locked(prbs_locked[l]),
      .bit_errors(prbs_err[l]), .words(pwords)
    );
  end

  // Central Router and FIFOs
  block_t          th_wdata, fh_rdata;
  logic            th_wr, th_full, th_empty, th_rd;
  logic            fh_wr, fh_full, fh_empty, fh_rd;
  logic [DATA_W-1:0] th_rdata, fh_wdata;
  logic [AW:0]     fh_level;
  logic [31:0]     overflows, ttc_frames, th_full_cycles;
  logic [15:0]     fh_errors, len_errors;

  central_router #(.LINKS(LINKS), .ELINKS(ELINKS), .ID_BASE(ID_BASE)) u_cr (
    .clk, .rst_n, .chunk_size, .elink_en, .ttc_sel,
    .rx_stb(rx_stb & locked), .rx_dvalid(rx_dv), .rx_data,
    .frame_stb, .tx_data, .tx_dvalid(tx_dv),
    .l1a, .bcr, .ecr, .brcst_valid, .brcst,
    .th_wr, .th_data(th_wdata), .th_full, .fh_empty, .fh_data(fh_rdata), .fh_rd,
    .overflows, .fh_errors, .ttc_frames
  );

  sync_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_th_fifo (
    .clk, .rst_n, .wr_en(th_wr), .wr_data(th_wdata), .full(th_full),
    .rd_en(th_rd), .rd_data(th_rdata), .empty(th_empty), .level(th_level)
  );

  sync_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fh_fifo (
    .clk, .rst_n, .wr_en(fh_wr), .wr_data(fh_wdata), .full(fh_full),
    .rd_en(fh_rd), .rd_data(fh_rdata), .empty(fh_empty), .level(fh_level)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) th_full_cycles <= '0;
    else if (th_full) th_full_cycles <= th_full_cycles + 1'b1;
  end

  // monitors
  logic [63:0] app_mon [8];
  always_comb begin
    logic [63:0] ce, pe;
    ce = '0;
    pe = '0;
    for (int l = 0; l < LINKS; l++) begin
      ce = ce + 64'(chk_err[l]);
      pe = pe + 64'(prbs_err[l]);
    end
    app_mon[0] = 64'(overflows);
    app_mon[1] = 64'(fh_errors);
    app_mon[2] = 64'(ttc_frames);
    app_mon[3] = 64'(locked);
    app_mon[4] = ce;
    app_mon[5] = pe;
    app_mon[6] = 64'(prbs_locked);
    app_mon[7] = 64'(th_full_cycles);
  end

  wupper #(.NUM_DESC(8), .LINKS(LINKS), .FIFO_AW(AW)) u_wupper (
    .clk, .rst_n, .reg_wr, .reg_rd, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .rq_data, .rq_valid, .rq_last, .rq_ready, .rc_data, .rc_valid, .rc_last, .rc_ready,
    .msi_valid, .msi_vec, .msi_ack,
    .th_data(th_rdata), .th_empty, .th_level, .th_rd,
    .fh_wr, .fh_data(fh_wdata), .fh_level,
    .chunk_size, .elink_en, .ttc_sel, .widebus, .app_mon, .len_errors
  );

endmodule
