// sync_fifo: the 256-bit user FIFO between the Central Router and the DMA
// engine (one for each direction).
//
// A memory array with write and read pointers one bit wider than the
// address, so that full and empty differ only in that top bit. Writes are
// taken when wr_en is high and the FIFO is not full; rd_data always shows
// the oldest word (first-word fall-through) and rd_en pops it. level counts
// the words held. A write to a full FIFO or a read from an empty one is
// ignored and flagged by an assertion.
// Follows the paper: 256-bit width. Own choices: depth, single clock,
// fall-through read.
module sync_fifo #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     full,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   level
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp_q, rp_q;

  assign level   = wp_q - rp_q;
  assign full    = (level == DEPTH[AW:0]);
  assign empty   = (wp_q == rp_q);
  assign rd_data = mem[rp_q[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp_q[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= '0;
      rp_q <= '0;
    end else begin
      if (wr_en && !full) wp_q <= wp_q + 1'b1;
      if (rd_en && !empty) rp_q <= rp_q + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));

endmodule
