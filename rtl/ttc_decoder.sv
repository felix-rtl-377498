// ttc_decoder: decodes the serial TTC stream received from the clock and
// data recovery chip.
//
// The stream interleaves two channels bit by bit: the A channel carries the
// Level-1 Accept, one bit per bunch crossing, and the B channel carries
// framed commands. The decoder takes the first bit after reset as an A bit
// and alternates from there. On the B channel, which idles at 1, a frame
// starts with a 0 start bit followed by a format bit. A short (broadcast)
// frame holds 8 command bits, most significant first, 5 check bits and a
// stop bit 1; a long (addressed) frame holds 40 more bits and is skipped.
// Bit BCR_BIT of a broadcast is the Bunch Counter Reset and bit ECR_BIT the
// Event Counter Reset.
//
// Interface: ttc_bit/ttc_bit_valid carry one serial bit per strobe. l1a,
// bcr, ecr and brcst_valid are one-cycle pulses; brcst holds the last
// broadcast. l1a pulses the cycle after its A bit; a broadcast is output the
// cycle after its stop bit. Frames whose stop bit is 0 are dropped and
// counted in frame_errors.
// Follows the paper: A/B channel split, L1A on A, BCR among B commands.
// Own choices: frame format (the TTC system's), bit positions of BCR/ECR,
// no check-bit verification, fixed A/B phase after reset.
module ttc_decoder #(
  parameter int unsigned BCR_BIT = 0,
  parameter int unsigned ECR_BIT = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ttc_bit,
  input  logic       ttc_bit_valid,
  output logic       l1a,
  output logic       bcr,
  output logic       ecr,
  output logic [7:0] brcst,
  output logic       brcst_valid,
  output logic [7:0] frame_errors
);

  typedef enum logic [1:0] {B_IDLE, B_FORMAT, B_SHORT, B_LONG} bstate_e;

  bstate_e     st_q;
  logic        phase_q;      // 0: next bit is A, 1: next bit is B
  logic [5:0]  cnt_q;
  logic [13:0] sh_q;         // 8 command + 5 check + stop

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q         <= B_IDLE;
      phase_q      <= 1'b0;
      cnt_q        <= '0;
      sh_q         <= '0;
      l1a          <= 1'b0;
      bcr          <= 1'b0;
      ecr          <= 1'b0;
      brcst        <= '0;
      brcst_valid  <= 1'b0;
      frame_errors <= '0;
    end else begin
      l1a         <= 1'b0;
      bcr         <= 1'b0;
      ecr         <= 1'b0;
      brcst_valid <= 1'b0;
      if (ttc_bit_valid) begin
        phase_q <= ~phase_q;
        if (!phase_q) begin
          l1a <= ttc_bit;
        end else begin
          unique case (st_q)
            B_IDLE:   if (!ttc_bit) st_q <= B_FORMAT;
            B_FORMAT: begin
              cnt_q <= '0;
              st_q  <= ttc_bit ? B_LONG : B_SHORT;
            end
            B_SHORT: begin
              sh_q  <= {sh_q[12:0], ttc_bit};
              cnt_q <= cnt_q + 1'b1;
              if (cnt_q == 6'd13) begin
                st_q <= B_IDLE;
                if (ttc_bit) begin
                  // sh_q[12:5] holds the command, sh_q[4:0] the check bits
                  brcst       <= sh_q[12:5];
                  brcst_valid <= 1'b1;
                  bcr         <= sh_q[5 + BCR_BIT];
                  ecr         <= sh_q[5 + ECR_BIT];
                end else begin
                  frame_errors <= frame_errors + 1'b1;
                end
              end
            end
            B_LONG: begin
              cnt_q <= cnt_q + 1'b1;
              if (cnt_q == 6'd39) st_q <= B_IDLE;
            end
            default: st_q <= B_IDLE;
          endcase
        end
      end
    end
  end

endmodule
