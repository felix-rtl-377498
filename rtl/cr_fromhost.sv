// cr_fromhost: from-host half of the Central Router.
//
// Reads 256-bit blocks (felix_pkg::block_t) from the FromHost FIFO. The
// header names the destination E-link and the number of payload bytes. A
// block whose E-link has an empty buffer is copied into it and popped; if
// that buffer is still sending, the FIFO head waits. Each E-link then sends
// one byte of its buffer per GBT frame strobe until it is empty. Blocks
// with a bad marker, a zero length or an E-link outside this router are
// popped and counted as errors.
// Interface: FIFO read side (fall-through), frame_stb, and per E-link a byte
// with a valid bit, both held from one frame strobe to the next.
// Timing: a block popped at cycle t sends its first byte at the next frame
// strobe after t.
// Follows the paper: from-host path from the DMA FIFO to the E-links.
// Own choices: block format, one-block buffer per E-link, head-of-line wait.
module cr_fromhost
  import felix_pkg::*;
#(
  parameter int unsigned NUM_ELINKS = 96,
  parameter int unsigned ID_BASE    = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  fifo_empty,
  input  block_t                fifo_data,
  output logic                  fifo_rd,
  input  logic                  frame_stb,
  output logic [7:0]            tx_byte  [NUM_ELINKS],
  output logic [NUM_ELINKS-1:0] tx_valid,
  output logic [15:0]           errors
);

  logic [BLK_BYTES*8-1:0] buf_q [NUM_ELINKS];
  logic [4:0]             left_q[NUM_ELINKS];

  blk_hdr_t    h;
  int unsigned local_id;
  logic        hdr_bad, target_free;

  assign h        = fifo_data.hdr;
  assign local_id = int'(h.elink) - int'(ID_BASE);
  assign hdr_bad  = (h.marker != BLK_MARKER) || (h.nbytes == 0) ||
                    (h.nbytes > 5'(BLK_BYTES)) ||
                    (int'(h.elink) < int'(ID_BASE)) || (local_id >= NUM_ELINKS);
  always_comb begin
    target_free = 1'b0;
    for (int e = 0; e < NUM_ELINKS; e++)
      if (e == local_id && left_q[e] == 0) target_free = 1'b1;
  end
  assign fifo_rd = !fifo_empty && (hdr_bad || target_free);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NUM_ELINKS; e++) begin
        buf_q[e]   <= '0;
        left_q[e]  <= '0;
        tx_byte[e] <= '0;
      end
      tx_valid <= '0;
      errors   <= '0;
    end else begin
      if (frame_stb) begin
        for (int e = 0; e < NUM_ELINKS; e++) begin
          tx_valid[e] <= (left_q[e] != 0);
          tx_byte[e]  <= (left_q[e] != 0) ? buf_q[e][7:0] : 8'h00;
          if (left_q[e] != 0) begin
            buf_q[e]  <= buf_q[e] >> 8;
            left_q[e] <= left_q[e] - 1'b1;
          end
        end
      end
      if (fifo_rd) begin
        if (hdr_bad) begin
          errors <= errors + 1'b1;
        end else begin
          for (int e = 0; e < NUM_ELINKS; e++) begin
            if (e == local_id) begin
              buf_q[e]  <= fifo_data.payload;
              left_q[e] <= h.nbytes;
            end
          end
        end
      end
    end
  end

endmodule
