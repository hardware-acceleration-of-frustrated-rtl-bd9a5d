// accumulator -- sums the reverse-convolution maps of all filters and adds the visible bias.
//
// For every visible position (r, c):
//   z[r][c] = sat12( vbias(c) + sum_{k < NF} y[k][r][c] )
// where vbias(c) is vbias_even for even columns, and for odd columns vbias_odd when
// separate odd/even biases are enabled (else vbias_even). Inputs are CONV_W-bit
// words, the result ACC_W = CONV_W + 2 bits, saturated. Columns are counted from 0.
//
// The per-position sum over the NF filter groups, the visible bias added here, the
// odd/even column option and the two extra bits follow the published design;
// saturation and column numbering from 0 are this design's choices.
// Purely combinational.
module accumulator
  import crbm_pkg::*;
#(
  parameter int NF   = NF_DEF,
  parameter int R    = L_DEF,
  parameter int C    = L_DEF,
  parameter int IN_W = CONV_W,
  parameter int OUT_W = ACC_W
) (
  input  logic signed [IN_W-1:0]  y [NF][R][C],
  input  logic signed [OUT_W-1:0] vbias_even,
  input  logic signed [OUT_W-1:0] vbias_odd,
  input  logic                    oddeven_bias,
  output logic signed [OUT_W-1:0] z [R][C]
);

  localparam int SUM_W = OUT_W + $clog2(NF + 1) + 1;

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      logic signed [SUM_W-1:0] acc;
      always_comb begin
        acc = (oddeven_bias && c % 2 == 1) ? SUM_W'(vbias_odd) : SUM_W'(vbias_even);
        for (int k = 0; k < NF; k++) acc += SUM_W'(y[k][r][c]);
      end
      assign z[r][c] = OUT_W'(sat(32'(acc), OUT_W));
    end
  end

endmodule
