// wupper_interrupt: interrupt controller of the DMA engine.
//
// One interrupt vector per descriptor. An event from DMA control sets the
// vector's pending bit if its mask bit is set. When no interrupt is
// outstanding, the lowest pending vector is sent to the PCIe core as
// msi_valid with msi_vec and held until msi_ack; its pending bit is then
// cleared. Events that arrive while a vector is pending are merged.
// Timing: msi_valid rises the cycle after the event at the earliest.
// Follows the paper: an interrupt controller fed by the DMA engine and
// feeding the PCIe core. Own choices: everything else.
module wupper_interrupt #(
  parameter int unsigned NUM_VEC = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NUM_VEC-1:0]         evt,
  input  logic [NUM_VEC-1:0]         mask,
  output logic                       msi_valid,
  output logic [$clog2(NUM_VEC)-1:0] msi_vec,
  input  logic                       msi_ack,
  output logic [31:0]                sent
);

  logic [NUM_VEC-1:0] pend_q;
  logic [$clog2(NUM_VEC)-1:0] first;
  logic any;

  always_comb begin
    any   = 1'b0;
    first = '0;
    for (int v = NUM_VEC - 1; v >= 0; v--) begin
      if (pend_q[v]) begin
        any   = 1'b1;
        first = v[$clog2(NUM_VEC)-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q    <= '0;
      msi_valid <= 1'b0;
      msi_vec   <= '0;
      sent      <= '0;
    end else begin
      logic [NUM_VEC-1:0] p;
      p = pend_q;
      if (msi_valid && msi_ack) begin
        msi_valid <= 1'b0;
        sent      <= sent + 1'b1;
      end else if (!msi_valid && any) begin
        msi_valid <= 1'b1;
        msi_vec   <= first;
        p[first]  = 1'b0;
      end
      // an event in the cycle its vector is sent stays pending for later
      pend_q <= p | (evt & mask);
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           msi_valid && !msi_ack |=> msi_valid && $stable(msi_vec));

endmodule
