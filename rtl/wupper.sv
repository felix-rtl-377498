// wupper: the DMA engine of one firmware set.
//
// Joins the register block, the descriptor table and sequencer
// (wupper_dma_control), the data mover (wupper_dma_read_write) and the
// interrupt controller. The user side is a 256-bit ToHost FIFO read port
// and a FromHost FIFO write port; the PCIe side is a request stream (rq),
// a completion stream (rc), a register access port and interrupt requests.
// The PCIe hard block itself is outside: in a real card rq/rc would be the
// vendor core's requester interfaces and the register port its completer
// interface.
// Application configuration registers (chunk size, E-link enable, TTC
// select, wide-bus mode) and 16 monitor inputs live in the same register
// map (see wupper_regs).
// Follows the paper: Wupper structure of DMA control, DMA read/write,
// interrupt controller and registers. Own choices: see the sub-blocks; all
// of it runs on one clock.
module wupper
  import felix_pkg::*;
#(
  parameter int unsigned NUM_DESC = 8,
  parameter int unsigned LINKS    = 12,
  parameter int unsigned FIFO_AW  = 9
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // register access
  input  logic                        reg_wr,
  input  logic                        reg_rd,
  input  logic [7:0]                  reg_addr,
  input  logic [63:0]                 reg_wdata,
  output logic [63:0]                 reg_rdata,
  output logic                        reg_rvalid,
  // PCIe streams
  output logic [DATA_W-1:0]           rq_data,
  output logic                        rq_valid,
  output logic                        rq_last,
  input  logic                        rq_ready,
  input  logic [DATA_W-1:0]           rc_data,
  input  logic                        rc_valid,
  input  logic                        rc_last,
  output logic                        rc_ready,
  output logic                        msi_valid,
  output logic [$clog2(NUM_DESC)-1:0] msi_vec,
  input  logic                        msi_ack,
  // user FIFOs
  input  logic [DATA_W-1:0]           th_data,
  input  logic                        th_empty,
  input  logic [FIFO_AW:0]            th_level,
  output logic                        th_rd,
  output logic                        fh_wr,
  output logic [DATA_W-1:0]           fh_data,
  input  logic [FIFO_AW:0]            fh_level,
  // configuration and monitors
  output logic [15:0]                 chunk_size,
  output logic [LINKS-1:0]            elink_en,
  output logic [LINKS-1:0]            ttc_sel,
  output logic [LINKS-1:0]            widebus,
  input  logic [63:0]                 app_mon [8],
  output logic [15:0]                 len_errors
);

  localparam int unsigned DW = $clog2(NUM_DESC);

  logic                desc_wr, req_valid, req_take, req_from_host, xfer_done;
  logic [DW-1:0]       desc_idx, req_idx;
  logic [1:0]          desc_field;
  logic [63:0]         desc_wdata, req_addr;
  logic [NUM_DESC-1:0] enable_set, enabled, done, evt, irq_mask;
  logic [63:0]         cur_addr [NUM_DESC];
  logic [15:0]         req_words;
  logic [31:0]         full_stalls, irq_sent, w_th, w_fh;
  logic [63:0]         mon [16];
  logic [15:0]         fh_free;

  assign fh_free = 16'((1 << FIFO_AW) - fh_level);

  always_comb begin
    for (int i = 0; i < 8; i++) mon[i] = app_mon[i];
    mon[8]  = 64'(len_errors);
    mon[9]  = 64'(full_stalls);
    mon[10] = 64'(irq_sent);
    mon[11] = 64'(w_th);
    mon[12] = 64'(w_fh);
    mon[13] = 64'(th_level);
    mon[14] = 64'(fh_level);
    mon[15] = '0;
  end

  wupper_regs #(.NUM_DESC(NUM_DESC), .LINKS(LINKS)) u_regs (
    .clk, .rst_n, .reg_wr, .reg_rd, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .desc_wr, .desc_idx, .desc_field, .desc_wdata, .enable_set, .enabled, .done,
    .cur_addr, .irq_mask, .chunk_size, .elink_en, .ttc_sel, .widebus, .mon
  );

  wupper_dma_control #(.NUM_DESC(NUM_DESC)) u_ctrl (
    .clk, .rst_n, .desc_wr, .desc_idx, .desc_field, .desc_wdata, .enable_set,
    .th_level(16'(th_level)), .fh_free,
    .req_valid, .req_idx, .req_addr, .req_words, .req_from_host, .req_take, .xfer_done,
    .enabled, .done, .cur_addr, .evt, .full_stalls
  );

  wupper_dma_read_write u_rw (
    .clk, .rst_n, .req_valid, .req_addr, .req_words, .req_from_host, .req_take, .xfer_done,
    .th_data, .th_empty, .th_rd, .fh_wr, .fh_data,
    .rq_data, .rq_valid, .rq_last, .rq_ready, .rc_data, .rc_valid, .rc_last, .rc_ready,
    .len_errors, .words_to_host(w_th), .words_from_host(w_fh)
  );

  wupper_interrupt #(.NUM_VEC(NUM_DESC)) u_irq (
    .clk, .rst_n, .evt, .mask(irq_mask), .msi_valid, .msi_vec, .msi_ack, .sent(irq_sent)
  );

endmodule
