// lattice_wrapper -- boundary conditions for the forward convolution.
//
// Extends the active rows x cols part of the L x L visible register to an
// (L+M-1) x (L+M-1) map that the M x M forward filters slide over. Along each
// direction, index i of the output takes visible index i while i < n (n = active
// rows or columns). The next M-1 indices take visible index i - n when that
// direction is periodic (the first M-1 rows/columns are copied after the last) and
// are zero when it is open; everything beyond is zero. Rows and columns have
// separate periodicity flags.
//
// The copy-or-zero rule and the (L+M-1) output size follow the published design;
// support for an active size smaller than L is needed for the runtime lattice size
// the host writes, and the zeroing beyond it is this design's choice.
// Purely combinational.
module lattice_wrapper
  import crbm_pkg::*;
#(
  parameter int L = L_DEF,
  parameter int M = M_DEF
) (
  input  logic [L-1:0]     v  [L],
  input  lattice_cfg_t     cfg,
  output logic [L+M-2:0]   vw [L+M-1]
);

  localparam int WL = L + M - 1;

  // Source index of output index i along one direction; -1 when the node is zero.
  function automatic int src_index(input int i, input int n, input logic per);
    if (i < n) return i;
    if (per && (i < n + M - 1) && (i - n < n)) return i - n;
    return -1;
  endfunction

  logic [L-1:0] rw [WL];  // rows already wrapped, columns not yet

  always_comb begin
    for (int r = 0; r < WL; r++) begin
      int sr;
      sr = src_index(r, int'(cfg.rows), cfg.per_row);
      rw[r] = (sr >= 0 && sr < L) ? v[sr] : '0;
    end
    for (int c = 0; c < WL; c++) begin
      int sc;
      sc = src_index(c, int'(cfg.cols), cfg.per_col);
      for (int r = 0; r < WL; r++)
        vw[r][c] = (sc >= 0 && sc < L) ? rw[r][sc] : 1'b0;
    end
  end

endmodule
