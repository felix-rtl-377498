// elink_tohost: to-host packer for one E-link.
//
// Bytes received on the E-link are cut into chunks of chunk_size bytes and
// packed into 256-bit blocks (felix_pkg::block_t): a 32-bit header with the
// E-link number, a 5-bit sequence number, an end-of-chunk flag and the
// number of valid bytes, followed by up to 28 payload bytes. A block is
// closed when it holds 28 bytes or when the chunk ends, so a chunk larger
// than 28 bytes is split over several blocks and the host joins them again
// using the end-of-chunk flag. The sequence number counts every block
// closed, so the host can see a lost block as a gap.
//
// Closed blocks wait in a two-entry queue for the router's arbiter
// (blk_valid/blk_ready handshake, blk is the queue head). When a block
// closes while the queue is full it is dropped and counted in overflows.
// Timing: a block closed by the byte at cycle t is offered from cycle t+1.
// Follows the paper: chunks, splitting for transport, E-link identifier
// and sequence number in each block. Own choices: block format, direct
// (unencoded) E-link bytes, queue depth, drop-on-overflow.
module elink_tohost
  import felix_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [ELINK_ID_W-1:0] elink_id,
  input  logic [15:0]           chunk_size,   // bytes, >= 1
  input  logic                  byte_valid,
  input  logic [7:0]            byte_in,
  output logic                  blk_valid,
  input  logic                  blk_ready,
  output block_t                blk,
  output logic [15:0]           overflows
);

  logic [BLK_BYTES*8-1:0] buf_q;
  logic [4:0]             nb_q;       // bytes in buf_q
  logic [15:0]            ccnt_q;     // bytes of the current chunk so far
  logic [SEQ_W-1:0]       seq_q;
  block_t                 q_q [2];
  logic [1:0]             qn_q;       // entries in queue

  logic   close, eoc;
  block_t nblk;

  assign eoc   = (ccnt_q + 16'd1 >= chunk_size);
  assign close = byte_valid && (eoc || nb_q == 5'(BLK_BYTES - 1));

  always_comb begin
    nblk                = '0;
    nblk.payload        = buf_q;
    nblk.payload[8*nb_q +: 8] = byte_in;
    nblk.hdr.marker     = BLK_MARKER;
    nblk.hdr.elink      = elink_id;
    nblk.hdr.seq        = seq_q;
    nblk.hdr.eoc        = eoc;
    nblk.hdr.nbytes     = nb_q + 5'd1;
  end

  assign blk_valid = (qn_q != 0);
  assign blk       = q_q[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q     <= '0;
      nb_q      <= '0;
      ccnt_q    <= '0;
      seq_q     <= '0;
      qn_q      <= '0;
      q_q[0]    <= '0;
      q_q[1]    <= '0;
      overflows <= '0;
    end else begin
      logic [1:0] n;
      n = qn_q;
      if (blk_ready && n != 0) begin
        q_q[0] <= q_q[1];
        n = n - 1'b1;
      end
      if (byte_valid) begin
        if (close) begin
          buf_q  <= '0;
          nb_q   <= '0;
          ccnt_q <= eoc ? 16'd0 : ccnt_q + 16'd1;
          seq_q  <= seq_q + 1'b1;
          if (n == 2) begin
            overflows <= overflows + 1'b1;
          end else begin
            q_q[n[0]] <= nblk;
            n = n + 1'b1;
          end
        end else begin
          buf_q[8*nb_q +: 8] <= byte_in;
          nb_q   <= nb_q + 1'b1;
          ccnt_q <= ccnt_q + 16'd1;
        end
      end
      qn_q <= n;
    end
  end

  // a block offered stays offered until it is taken
  a_valid_held: assert property (@(posedge clk) disable iff (!rst_n)
                                 blk_valid && !blk_ready |=> blk_valid);

endmodule
