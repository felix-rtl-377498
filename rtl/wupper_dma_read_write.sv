// wupper_dma_read_write: moves the data of one DMA request at a time
// between the user FIFOs and the PCIe request/completion streams.
//
// To-host request: a header beat (felix_pkg::rq_hdr_t: host address,
// length in 256-bit words, memory-write type, tag) goes out on rq, followed
// by the payload words read from the ToHost FIFO, the last with rq_last.
// From-host request: a memory-read header beat alone goes out on rq. The
// completion arrives on rc as a header beat (felix_pkg::rc_hdr_t) followed
// by payload beats; the header is stripped, its length and status are
// checked against the request, and the payload is written into the
// FromHost FIFO. A completion with the wrong length, tag or status, or
// whose rc_last does not fall on the announced length, is discarded and
// counted in len_errors.
// Handshakes: rq_valid/rq_ready as in AXI stream; rc is always ready while
// a read is waiting, because the request was issued only when the FromHost
// FIFO had room. xfer_done pulses when a request has finished; one request
// is in flight at a time. The FIFO read is fall-through.
// Follows the paper: header added in front of FIFO data to the host,
// header removed and length checked before data is shifted into the FIFO.
// Own choices: header layouts, one outstanding read, error handling.
module wupper_dma_read_write
  import felix_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // from DMA control
  input  logic              req_valid,
  input  logic [63:0]       req_addr,
  input  logic [15:0]       req_words,
  input  logic              req_from_host,
  output logic              req_take,
  output logic              xfer_done,
  // ToHost FIFO (read side)
  input  logic [DATA_W-1:0] th_data,
  input  logic              th_empty,
  output logic              th_rd,
  // FromHost FIFO (write side)
  output logic              fh_wr,
  output logic [DATA_W-1:0] fh_data,
  // PCIe requester request stream
  output logic [DATA_W-1:0] rq_data,
  output logic              rq_valid,
  output logic              rq_last,
  input  logic              rq_ready,
  // PCIe requester completion stream
  input  logic [DATA_W-1:0] rc_data,
  input  logic              rc_valid,
  input  logic              rc_last,
  output logic              rc_ready,
  // monitors
  output logic [15:0]       len_errors,
  output logic [31:0]       words_to_host,
  output logic [31:0]       words_from_host
);

  typedef enum logic [2:0] {S_IDLE, S_WR_HDR, S_WR_DATA, S_RD_HDR, S_RC_HDR, S_RC_DATA, S_RC_DROP} state_e;

  state_e      st_q;
  logic [63:0] addr_q;
  logic [15:0] words_q, cnt_q;
  logic [7:0]  tag_q;
  rq_hdr_t     hdr;
  rc_hdr_t     rch;

  always_comb begin
    hdr          = '0;
    hdr.addr     = addr_q;
    hdr.nwords   = 20'(words_q);
    hdr.req_type = (st_q == S_RD_HDR) ? REQ_MEM_READ : REQ_MEM_WRITE;
    hdr.tag      = tag_q;
  end
  assign rch = rc_hdr_t'(rc_data);

  always_comb begin
    rq_valid = 1'b0;
    rq_last  = 1'b0;
    rq_data  = hdr;
    th_rd    = 1'b0;
    rc_ready = 1'b0;
    fh_wr    = 1'b0;
    fh_data  = rc_data;
    req_take = (st_q == S_IDLE) && req_valid;
    unique case (st_q)
      S_WR_HDR:  rq_valid = 1'b1;
      S_WR_DATA: begin
        rq_valid = !th_empty;
        rq_data  = th_data;
        rq_last  = (cnt_q == words_q - 16'd1);
        th_rd    = rq_valid && rq_ready;
      end
      S_RD_HDR: begin
        rq_valid = 1'b1;
        rq_last  = 1'b1;
      end
      S_RC_HDR, S_RC_DROP: rc_ready = 1'b1;
      S_RC_DATA: begin
        rc_ready = 1'b1;
        fh_wr    = rc_valid;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q            <= S_IDLE;
      addr_q          <= '0;
      words_q         <= '0;
      cnt_q           <= '0;
      tag_q           <= '0;
      xfer_done       <= 1'b0;
      len_errors      <= '0;
      words_to_host   <= '0;
      words_from_host <= '0;
    end else begin
      xfer_done <= 1'b0;
      unique case (st_q)
        S_IDLE: if (req_valid) begin
          addr_q  <= req_addr;
          words_q <= req_words;
          cnt_q   <= '0;
          st_q    <= req_from_host ? S_RD_HDR : S_WR_HDR;
        end
        S_WR_HDR: if (rq_ready) st_q <= S_WR_DATA;
        S_WR_DATA: if (th_rd) begin
          cnt_q         <= cnt_q + 16'd1;
          words_to_host <= words_to_host + 1'b1;
          if (rq_last) begin
            st_q      <= S_IDLE;
            tag_q     <= tag_q + 8'd1;
            xfer_done <= 1'b1;
          end
        end
        S_RD_HDR: if (rq_ready) st_q <= S_RC_HDR;
        S_RC_HDR: if (rc_valid) begin
          if (rch.nwords == 20'(words_q) && rch.tag == tag_q && rch.status == '0 && !rc_last) begin
            st_q <= S_RC_DATA;
          end else begin
            len_errors <= len_errors + 1'b1;
            if (rc_last) begin
              st_q      <= S_IDLE;
              tag_q     <= tag_q + 8'd1;
              xfer_done <= 1'b1;
            end else begin
              st_q <= S_RC_DROP;
            end
          end
        end
        S_RC_DATA: if (rc_valid) begin
          cnt_q           <= cnt_q + 16'd1;
          words_from_host <= words_from_host + 1'b1;
          if (rc_last != (cnt_q == words_q - 16'd1)) len_errors <= len_errors + 1'b1;
          if (rc_last) begin
            st_q      <= S_IDLE;
            tag_q     <= tag_q + 8'd1;
            xfer_done <= 1'b1;
          end else if (cnt_q == words_q - 16'd1) begin
            st_q <= S_RC_DROP;     // longer than announced: drop the rest
          end
        end
        S_RC_DROP: if (rc_valid && rc_last) begin
          st_q      <= S_IDLE;
          tag_q     <= tag_q + 8'd1;
          xfer_done <= 1'b1;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // AXI-stream rule: a request beat, once offered, stays until taken
  a_rq_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              rq_valid && !rq_ready |=> rq_valid && $stable(rq_data));

endmodule
