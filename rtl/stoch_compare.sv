// stoch_compare -- stochastic binary neurons: compare probability with random number.
//
// For every lane, s = 1 when the sigmoid probability p is strictly greater than the
// LFSR value rnd, else 0. With rnd uniform over the LFSR's codes this makes
// P(s = 1) = p / 2^16, i.e. a sample of a binary variable with the sigmoid
// probability. The strict comparison ("sigmoid exceeds the LFSR output") follows the
// published design. Purely combinational.
module stoch_compare
  import crbm_pkg::*;
#(
  parameter int LANES = 81
) (
  input  logic [PROB_W-1:0] p   [LANES],
  input  logic [PROB_W-1:0] rnd [LANES],
  output logic [LANES-1:0]  s
);

  always_comb begin
    for (int i = 0; i < LANES; i++) s[i] = (p[i] > rnd[i]);
  end

endmodule
