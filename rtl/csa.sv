// csa -- current-mode sense amplifier of one bitline pair, digital equivalent.
//
// The p-bit's decision is made by comparing the two bitline currents of its
// pair: I_BL(i,1) (cells storing +1, plus the positive bias rows) against
// I_BL(i,2) (cells storing -1, plus the negative bias rows). With the random
// bias already added to the bitlines by the bias region, this comparison is the
// p-bit update rule x_i = 1 if s_in >= u, else 0. The currents are given as
// integer counts of unit cell currents. Equal currents give 1, as in the
// update rule "s_in >= u"; an analog sense amplifier would resolve a tie
// by its offset and noise.
//
// Interface / timing: combinational; s = (i_left >= i_right). diff is the
// signed MAC difference, for observation.
module csa #(
  parameter int unsigned CNT_W = 11
) (
  input  logic [CNT_W-1:0]      i_left,
  input  logic [CNT_W-1:0]      i_right,
  output logic                  s,
  output logic signed [CNT_W:0] diff
);

  always_comb begin
    diff = $signed({1'b0, i_left}) - $signed({1'b0, i_right});
    s    = (diff >= 0);
  end

endmodule
