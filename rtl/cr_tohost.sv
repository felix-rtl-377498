// cr_tohost: to-host half of the Central Router.
//
// One elink_tohost packer per E-link turns the E-link's bytes into
// 256-bit blocks. A round-robin arbiter then moves one ready block per
// cycle into the ToHost FIFO, starting its search just after the E-link it
// served last, and holds off while the FIFO is full. Each packer counts the
// blocks it had to drop; total_overflows sums those counts.
// Interface: per E-link byte and byte_valid (the GBT receiver's frame
// strobe for that link), the FIFO write port. Timing: a closed block can
// reach the FIFO one cycle after it closed, if it wins arbitration.
// Follows the paper: to-host routing of E-link data into the 256-bit FIFO.
// Own choices: round-robin arbitration, one block per cycle.
module cr_tohost
  import felix_pkg::*;
#(
  parameter int unsigned NUM_ELINKS = 96,
  parameter int unsigned ID_BASE    = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [15:0]            chunk_size,
  input  logic [NUM_ELINKS-1:0]  byte_valid,
  input  logic [7:0]             byte_in [NUM_ELINKS],
  output logic                   fifo_wr,
  output block_t                 fifo_data,
  input  logic                   fifo_full,
  output logic [31:0]            total_overflows
);

  localparam int unsigned IW = (NUM_ELINKS > 1) ? $clog2(NUM_ELINKS) : 1;

  logic [NUM_ELINKS-1:0] bv, br;
  block_t                blks [NUM_ELINKS];
  logic [15:0]           ovf  [NUM_ELINKS];
  logic [IW-1:0]         last_q, pick;
  logic                  any;

  for (genvar e = 0; e < NUM_ELINKS; e++) begin : g_elink
    elink_tohost u_pack (
      .clk, .rst_n,
      .elink_id  (ELINK_ID_W'(ID_BASE + e)),
      .chunk_size,
      .byte_valid(byte_valid[e]),
      .byte_in   (byte_in[e]),
      .blk_valid (bv[e]),
      .blk_ready (br[e]),
      .blk       (blks[e]),
      .overflows (ovf[e])
    );
  end

  // round robin: first valid E-link after last_q
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = 1; k <= NUM_ELINKS; k++) begin
      int unsigned idx;
      idx = (int'(last_q) + k) % NUM_ELINKS;
      if (!any && bv[idx]) begin
        any  = 1'b1;
        pick = IW'(idx);
      end
    end
    br = '0;
    if (any && !fifo_full) br[pick] = 1'b1;
  end

  assign fifo_wr   = any && !fifo_full;
  assign fifo_data = blks[pick];

  always_comb begin
    total_overflows = '0;
    for (int e = 0; e < NUM_ELINKS; e++) total_overflows = total_overflows + ovf[e];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_q <= IW'(NUM_ELINKS - 1);
    else if (fifo_wr) last_q <= pick;
  end

endmodule
