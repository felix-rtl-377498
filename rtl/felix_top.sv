// felix_top: FELIX firmware top level, the FPGA logic of one FELIX card.
//
// FELIX routes data between detector front-end links and host memory and
// forwards timing, trigger and control (TTC) information to the front ends.
// This top holds the parts that are shared by the whole card, the TTC
// decoder, the BUSY logic and the 40 MHz frame-slot counter, and NUM_SETS
// identical firmware sets (felix_set), each with LINKS_PER_SET GBT links,
// a Central Router, its FIFOs and a Wupper DMA engine for one 8-lane PCIe
// endpoint. The decoded TTC pulses go to every set, which forwards them on
// the links selected in its registers.
// All logic runs on one clock of FRAME_DIV x 40 MHz (240 MHz by default);
// each GBT frame of 120 bits is exchanged with the transceivers as
// FRAME_DIV words of 120/FRAME_DIV bits.
// Ports: per link one receive and one transmit word; the serial TTC stream
// from the clock and data recovery chip; per set the PCIe request and
// completion streams, register port and interrupts; BUSY.
// Link l of set s has E-links numbered (s*LINKS_PER_SET + l)*ELINKS + e.
// Follows the paper: two balanced sets, TTC decoding and fan-out, BUSY,
// 240 MHz link clock, 8 E-links per link, 24 links per card. Own choices:
// one clock for everything (the paper's DMA engine runs at 250 MHz), and
// the bus formats towards the PCIe core, which is not part of this RTL.
module felix_top
  import felix_pkg::*;
#(
  parameter int unsigned NUM_SETS        = 2,
  parameter int unsigned LINKS_PER_SET   = 12,
  parameter int unsigned ELINKS_PER_LINK = 8,
  parameter int unsigned FRAME_DIV       = 6,
  parameter int unsigned FIFO_DEPTH      = 512
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // TTC
  input  logic                   ttc_bit,
  input  logic                   ttc_bit_valid,
  // transceivers
  input  logic [120/FRAME_DIV-1:0] gbt_rx_word [NUM_SETS*LINKS_PER_SET],
  output logic [120/FRAME_DIV-1:0] gbt_tx_word [NUM_SETS*LINKS_PER_SET],
  // PCIe, one endpoint per set
  input  logic                   reg_wr    [NUM_SETS],
  input  logic                   reg_rd    [NUM_SETS],
  input  logic [7:0]             reg_addr  [NUM_SETS],
  input  logic [63:0]            reg_wdata [NUM_SETS],
  output logic [63:0]            reg_rdata [NUM_SETS],
  output logic                   reg_rvalid[NUM_SETS],
  output logic [DATA_W-1:0]      rq_data   [NUM_SETS],
  output logic                   rq_valid  [NUM_SETS],
  output logic                   rq_last   [NUM_SETS],
  input  logic                   rq_ready  [NUM_SETS],
  input  logic [DATA_W-1:0]      rc_data   [NUM_SETS],
  input  logic                   rc_valid  [NUM_SETS],
  input  logic                   rc_last   [NUM_SETS],
  output logic                   rc_ready  [NUM_SETS],
  output logic                   msi_valid [NUM_SETS],
  output logic [2:0]             msi_vec   [NUM_SETS],
  input  logic                   msi_ack   [NUM_SETS],
  // BUSY
  input  logic                   busy_force,
  output logic                   busy_out,
  output logic [31:0]            busy_asserts,
  output logic [7:0]             ttc_frame_errors
);

  localparam int unsigned GW = 120 / FRAME_DIV;
  localparam int unsigned LW = $clog2(FIFO_DEPTH) + 1;

  // 40 MHz frame slot
  logic [$clog2(FRAME_DIV)-1:0] fcnt_q;
  logic frame_stb;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fcnt_q <= '0;
    else fcnt_q <= (fcnt_q == FRAME_DIV - 1) ? '0 : fcnt_q + 1'b1;
  end
  assign frame_stb = (fcnt_q == FRAME_DIV - 1);

  logic       l1a, bcr, ecr, brcst_valid;
  logic [7:0] brcst;

  ttc_decoder u_ttc (
    .clk, .rst_n, .ttc_bit, .ttc_bit_valid, .l1a, .bcr, .ecr, .brcst, .brcst_valid,
    .frame_errors(ttc_frame_errors)
  );

  logic [LW-1:0] th_level [NUM_SETS];

  for (genvar s = 0; s < NUM_SETS; s++) begin : g_set
    logic [GW-1:0] rxw [LINKS_PER_SET];
    logic [GW-1:0] txw [LINKS_PER_SET];
    for (genvar l = 0; l < LINKS_PER_SET; l++) begin : g_map
      assign rxw[l] = gbt_rx_word[s*LINKS_PER_SET + l];
      assign gbt_tx_word[s*LINKS_PER_SET + l] = txw[l];
    end
    felix_set #(
      .LINKS(LINKS_PER_SET), .ELINKS(ELINKS_PER_LINK), .GEAR_W(GW),
      .FIFO_DEPTH(FIFO_DEPTH), .ID_BASE(s * LINKS_PER_SET * ELINKS_PER_LINK)
    ) u_set (
      .clk, .rst_n, .frame_stb, .rx_word(rxw), .tx_word(txw),
      .l1a, .bcr, .ecr, .brcst_valid, .brcst,
      .reg_wr(reg_wr[s]), .reg_rd(reg_rd[s]), .reg_addr(reg_addr[s]), .reg_wdata(reg_wdata[s]),
      .reg_rdata(reg_rdata[s]), .reg_rvalid(reg_rvalid[s]),
      .rq_data(rq_data[s]), .rq_valid(rq_valid[s]), .rq_last(rq_last[s]), .rq_ready(rq_ready[s]),
      .rc_data(rc_data[s]), .rc_valid(rc_valid[s]), .rc_last(rc_last[s]), .rc_ready(rc_ready[s]),
      .msi_valid(msi_valid[s]), .msi_vec(msi_vec[s]), .msi_ack(msi_ack[s]),
      .th_level(th_level[s])
    );
  end

  busy_ctrl #(.NUM_SETS(NUM_SETS), .LEVEL_W(LW), .HI(FIFO_DEPTH * 3 / 4), .LO(FIFO_DEPTH / 2)) u_busy (
    .clk, .rst_n, .level(th_level), .busy_force, .busy(busy_out), .busy_asserts
  );

  initial assert (120 % FRAME_DIV == 0) else $error("FRAME_DIV must divide 120");

endmodule
