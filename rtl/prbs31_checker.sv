// prbs31_checker: checks a received word stream against the PRBS-31
// sequence (x^31 + x^28 + 1), as used in the FULL-mode link test.
//
// The checker is self-seeding: its 31-bit state is loaded from the data
// while it is not yet locked, and it locks once LOCK_WORDS words in a row
// match the prediction. When locked, each word is compared with the
// sequence the state predicts and the number of differing bits is added to
// bit_errors; the state then advances from the received bits, so a bit
// error shows up as three wrong bits rather than a lost lock. Bits are
// taken least significant first.
// Interface: one word per cycle with valid. Timing: counters update one
// cycle after the word.
// Follows the paper: PRBS-31 checking of a receive link. Own choices: word
// width, bit order, lock rule.
module prbs31_checker #(
  parameter int unsigned W          = 20,
  parameter int unsigned LOCK_WORDS = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid,
  input  logic [W-1:0] data,
  output logic         locked,
  output logic [31:0]  bit_errors,
  output logic [31:0]  words
);

  logic [30:0] st_q;
  logic [3:0]  good_q;
  logic [W-1:0] pred;
  logic [30:0]  st_rx;        // state advanced with received bits
  logic [$clog2(W+1)-1:0] nerr;

  // st[0] is the newest bit; next bit = st[30] ^ st[27]
  always_comb begin
    logic [30:0] s;
    s = st_q;
    for (int i = 0; i < W; i++) begin
      pred[i] = s[30] ^ s[27];
      s = {s[29:0], data[i]};
    end
    st_rx = s;
    nerr = '0;
    for (int i = 0; i < W; i++) nerr = nerr + (pred[i] ^ data[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= '0;
      good_q     <= '0;
      locked     <= 1'b0;
      bit_errors <= '0;
      words      <= '0;
    end else if (valid) begin
      st_q <= st_rx;
      if (locked) begin
        words      <= words + 1'b1;
        bit_errors <= bit_errors + nerr;
      end else if (nerr == 0 && st_q != '0) begin
        good_q <= good_q + 1'b1;
        if (good_q == LOCK_WORDS - 1) locked <= 1'b1;
      end else begin
        good_q <= '0;
      end
    end
  end

endmodule
