// wupper_dma_control: descriptor table and sequencing of the DMA engine.
//
// Each of the NUM_DESC descriptors holds a host buffer [start, end), a
// direction (to-host or from-host), a transfer size in 256-bit words per
// PCIe request (TLP), a wrap-around (circular) bit, its current address and
// a pointer written by the host. Enabling a descriptor loads its current
// address with start. The engine serves enabled descriptors one request at
// a time in round-robin order; a descriptor is offered only when its data
// can move:
//   to-host:   the ToHost FIFO holds a full request, and in circular mode
//              the request fits in the space before the host pointer (the
//              host's read position; at least one byte always stays free);
//   from-host: the FromHost FIFO has room, and in circular mode the host
//              pointer (the host's write position) is a full request ahead.
// When wupper_dma_read_write reports a request done, the current address
// advances. At the end of the buffer a circular descriptor wraps to start;
// a single-pass one is marked done and disabled. Both raise an event for
// the interrupt controller. The last request of a pass is cut short if the
// buffer ends before a full request.
// Timing: req_* is combinational from the table; one request is in flight
// at a time (between req_take and xfer_done).
// Follows the paper: up to eight queued descriptors, to-host and from-host
// descriptors, continuous DMA into a circular buffer. Own choices: the
// round-robin order, the pointer rule, cut-short last request.
module wupper_dma_control
#(
  parameter int unsigned NUM_DESC = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // register writes
  input  logic                 desc_wr,
  input  logic [$clog2(NUM_DESC)-1:0] desc_idx,
  input  logic [1:0]           desc_field,   // 0 start, 1 end, 2 ctrl, 3 host pointer
  input  logic [63:0]          desc_wdata,
  input  logic [NUM_DESC-1:0]  enable_set,
  // FIFO state
  input  logic [15:0]          th_level,     // words in ToHost FIFO
  input  logic [15:0]          fh_free,      // free words in FromHost FIFO
  // request to read/write engine
  output logic                 req_valid,
  output logic [$clog2(NUM_DESC)-1:0] req_idx,
  output logic [63:0]          req_addr,
  output logic [15:0]          req_words,
  output logic                 req_from_host,
  input  logic                 req_take,
  input  logic                 xfer_done,
  // status
  output logic [NUM_DESC-1:0]  enabled,
  output logic [NUM_DESC-1:0]  done,
  output logic [63:0]          cur_addr [NUM_DESC],
  output logic [NUM_DESC-1:0]  evt,
  output logic [31:0]          full_stalls
);

  localparam int unsigned DW = $clog2(NUM_DESC);

  logic [63:0] start_q [NUM_DESC];
  logic [63:0] end_q   [NUM_DESC];
  logic [63:0] hptr_q  [NUM_DESC];
  logic [7:0]  tlpw_q  [NUM_DESC];
  logic        dir_q   [NUM_DESC];
  logic        wrap_q  [NUM_DESC];
  logic        busy_q;
  logic [DW-1:0] act_q, last_q;

  logic [NUM_DESC-1:0] ready;
  logic [NUM_DESC-1:0] blocked;    // enabled, FIFO ready, stopped by host pointer
  logic [15:0]         words [NUM_DESC];

  always_comb begin
    for (int d = 0; d < NUM_DESC; d++) begin
      logic [63:0] size, rem_w, diff, len;
      logic        fifo_ok, ptr_ok;
      size  = end_q[d] - start_q[d];
      rem_w = (end_q[d] - cur_addr[d]) >> 5;
      words[d] = (rem_w < 64'(tlpw_q[d])) ? rem_w[15:0] : 16'(tlpw_q[d]);
      len   = 64'(words[d]) << 5;
      diff  = hptr_q[d] - cur_addr[d];
      if (dir_q[d]) begin
        // data available between current address and host write pointer
        if (hptr_q[d] < cur_addr[d]) diff = diff + size;
        fifo_ok = (fh_free >= words[d]);
        ptr_ok  = !wrap_q[d] || (diff >= len);
      end else begin
        // free space up to the host read pointer, one byte kept free
        if (hptr_q[d] <= cur_addr[d]) diff = diff + size;
        fifo_ok = (th_level >= words[d]);
        ptr_ok  = !wrap_q[d] || (diff > len);
      end
      ready[d]   = enabled[d] && (words[d] != 0) && fifo_ok && ptr_ok;
      blocked[d] = enabled[d] && (words[d] != 0) && fifo_ok && !ptr_ok;
    end
  end

  // round robin after the last served descriptor
  always_comb begin
    req_valid = 1'b0;
    req_idx   = '0;
    for (int k = 1; k <= NUM_DESC; k++) begin
      int unsigned d;
      d = (int'(last_q) + k) % NUM_DESC;
      if (!req_valid && ready[d] && !busy_q) begin
        req_valid = 1'b1;
        req_idx   = DW'(d);
      end
    end
    req_addr      = cur_addr[req_idx];
    req_words     = words[req_idx];
    req_from_host = dir_q[req_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < NUM_DESC; d++) begin
        start_q[d]  <= '0;
        end_q[d]    <= '0;
        hptr_q[d]   <= '0;
        tlpw_q[d]   <= 8'd1;
        dir_q[d]    <= 1'b0;
        wrap_q[d]   <= 1'b0;
        cur_addr[d] <= '0;
      end
      enabled     <= '0;
      done        <= '0;
      evt         <= '0;
      busy_q      <= 1'b0;
      act_q       <= '0;
      last_q      <= DW'(NUM_DESC - 1);
      full_stalls <= '0;
    end else begin
      evt <= '0;
      if (desc_wr) begin
        unique case (desc_field)
          2'd0: start_q[desc_idx] <= desc_wdata;
          2'd1: end_q[desc_idx]   <= desc_wdata;
          2'd2: begin
            tlpw_q[desc_idx] <= desc_wdata[7:0];
            dir_q[desc_idx]  <= desc_wdata[8];
            wrap_q[desc_idx] <= desc_wdata[9];
          end
          default: hptr_q[desc_idx] <= desc_wdata;
        endcase
      end
      for (int d = 0; d < NUM_DESC; d++) begin
        if (enable_set[d] && !enabled[d]) begin
          enabled[d]  <= 1'b1;
          done[d]     <= 1'b0;
          cur_addr[d] <= start_q[d];
          // a fresh circular to-host buffer is empty: host read pointer at start
          if (desc_wr && desc_field == 2'd3 && desc_idx == DW'(d)) hptr_q[d] <= desc_wdata;
          else if (!dir_q[d]) hptr_q[d] <= start_q[d];
        end
      end
      if (|blocked && !busy_q && !req_valid) full_stalls <= full_stalls + 1'b1;
      if (req_take) begin
        busy_q <= 1'b1;
        act_q  <= req_idx;
        last_q <= req_idx;
      end
      if (xfer_done && busy_q) begin
        logic [63:0] nxt;
        busy_q <= 1'b0;
        nxt = cur_addr[act_q] + (64'(words[act_q]) << 5);
        if (nxt >= end_q[act_q]) begin
          evt[act_q] <= 1'b1;
          if (wrap_q[act_q]) begin
            cur_addr[act_q] <= start_q[act_q];
          end else begin
            cur_addr[act_q] <= nxt;
            enabled[act_q]  <= 1'b0;
            done[act_q]     <= 1'b1;
          end
        end else begin
          cur_addr[act_q] <= nxt;
        end
      end
    end
  end

  a_take_needs_valid: assert property (@(posedge clk) disable iff (!rst_n) req_take |-> req_valid);
  a_done_needs_busy:  assert property (@(posedge clk) disable iff (!rst_n) xfer_done |-> busy_q);

endmodule
