// sigmoid_lut -- look-up-table logistic function for a group of stochastic nodes.
//
// Each lane maps a signed fixed-point pre-activation x (IN_W bits, FRAC_W of them
// fraction) to p = sigmoid(x / 2^FRAC_W) as an unsigned PROB_W-bit fraction of one:
//   p = min(2^PROB_W - 1, round(2^PROB_W / (1 + exp(-x / 2^FRAC_W)))).
// The table has one entry per input code (1024 for the 10-bit forward words, 4096
// for the 12-bit accumulator words) and is computed at elaboration, so it always
// holds the value nearest the true sigmoid at the table's precision.
//
// The published design uses a precomputed LUT with configurable input and output
// widths and 16-bit outputs, one module per filter group; the rounding rule above is
// this design's choice. Purely combinational.
module sigmoid_lut
  import crbm_pkg::*;
#(
  parameter int LANES = 81,
  parameter int IN_W  = CONV_W,
  parameter int FRAC  = FRAC_W,
  parameter int OUT_W = PROB_W
) (
  input  logic signed [IN_W-1:0]  x [LANES],
  output logic        [OUT_W-1:0] p [LANES]
);

  typedef logic [OUT_W-1:0] table_t [2**IN_W];

  function automatic table_t build_table();
    table_t tab;
    for (int i = 0; i < 2**IN_W; i++) begin
      logic signed [IN_W-1:0] code;
      real arg, val;
      code = IN_W'(i);
      arg  = real'(code) / real'(2**FRAC);
      val  = real'(2.0**OUT_W) / (1.0 + $exp(-arg)) + 0.5;
      if (val > real'(2.0**OUT_W) - 1.0) val = real'(2.0**OUT_W) - 1.0;
      tab[i] = OUT_W'(longint'($floor(val)));
    end
    return tab;
  endfunction

  localparam table_t TAB = build_table();

  always_comb begin
    for (int i = 0; i < LANES; i++) p[i] = TAB[x[i]];
  end

endmodule
