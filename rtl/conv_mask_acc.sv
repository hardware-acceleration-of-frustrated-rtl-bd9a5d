// conv_mask_acc -- strided mask-and-accumulate convolution of a binary map.
//
// For every output position (i, j) it forms
//   y[i][j] = sat( bias + sum_{m,n < M} ( x[S*i+m][S*j+n] ? w[m][n] : 0 ) )
// i.e. a cross-correlation of the one-bit map x with a signed M x M filter. Because
// the nodes are single bits, each product is a 2:1 multiplexer that passes the
// weight or zero, and the M*M selected weights are added by an adder tree. The sum
// is formed at full width and saturated to OUT_W bits.
//
// One instance computes every output position in parallel, in one combinational
// pass, as in the published design. The same module serves both stages: the forward
// stage uses stride 2 over the wrapped visible map (OUT = 9 x 9 for L = 18) with the
// filter's hidden bias; the reverse stage uses stride 1 over a zero-padded hidden
// group (OUT = L x L) with the flipped filter and a zero bias. Saturation at 10 bits
// is this design's choice for the 10-bit convolution precision of the source.
module conv_mask_acc
  import crbm_pkg::*;
#(
  parameter int IN_R  = 20,
  parameter int IN_C  = 20,
  parameter int OUT_R = 9,
  parameter int OUT_C = 9,
  parameter int M     = M_DEF,
  parameter int S     = S_DEF,
  parameter int W_W   = CONV_W,
  parameter int OUT_W = CONV_W
) (
  input  logic        [IN_C-1:0]  x    [IN_R],
  input  logic signed [W_W-1:0]   w    [M][M],
  input  logic signed [W_W-1:0]   bias,
  output logic signed [OUT_W-1:0] y    [OUT_R][OUT_C]
);

  localparam int SUM_W = W_W + $clog2(M * M + 1) + 1;

  initial begin
    assert (S * (OUT_R - 1) + M <= IN_R && S * (OUT_C - 1) + M <= IN_C)
      else $error("conv_mask_acc: output does not fit the input map");
  end

  for (genvar i = 0; i < OUT_R; i++) begin : g_row
    for (genvar j = 0; j < OUT_C; j++) begin : g_col
      logic signed [SUM_W-1:0] acc;
      always_comb begin
        acc = SUM_W'(bias);
        for (int m = 0; m < M; m++)
          for (int n = 0; n < M; n++)
            acc += x[S*i+m][S*j+n] ? SUM_W'(w[m][n]) : '0;
      end
      assign y[i][j] = OUT_W'(sat(32'(acc), OUT_W));
    end
  end

endmodule
