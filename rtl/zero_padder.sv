// zero_padder -- spreads one hidden group over the visible grid for the reverse pass.
//
// The reverse (hidden -> visible) pass is the transpose of the stride-S forward
// convolution. It is computed as a stride-1 convolution with the flipped filter over
// an (L+M-1) x (L+M-1) map p that holds the hidden nodes S apart with zeros between:
//   p[S*i + M-1][S*j + M-1] = h[i][j]
// and zeros elsewhere. The first M-1 rows (columns) hold a copy of the hidden nodes
// that wrap around from the end of the lattice when that direction is periodic
// (index t = p - (M-1) + n, n = active visible rows or columns, taken when t is a
// multiple of S), and zeros when it is open. For L = 18, M = 3, S = 2 this puts the
// 9 hidden rows at padded rows 2, 4, ..., 18 and, when periodic, the last hidden row
// also at padded row 0.
//
// Inserting zeros between hidden nodes, copying the last rows/columns to the front
// when periodic and adding zeros to the first row/column when open follow the
// published design; the exact offsets are derived here from the forward indexing so
// that the reverse pass is the exact transpose of the forward pass.
// Purely combinational. Most outputs (every position that never holds a hidden
// node, e.g. odd padded rows for S = 2) are the constant 0 by construction; they are
// kept so the reverse convolution sees a full rectangular map and synthesis removes
// the logic they would need.
module zero_padder
  import crbm_pkg::*;
#(
  parameter int L  = L_DEF,
  parameter int M  = M_DEF,
  parameter int S  = S_DEF,
  parameter int LH = (L + 1) / S
) (
  input  logic [LH-1:0]    h [LH],
  input  lattice_cfg_t     cfg,
  output logic [L+M-2:0]   p [L+M-1]
);

  localparam int WL = L + M - 1;

  // Hidden index placed at padded index q along one direction; -1 for a zero.
  function automatic int hid_index(input int q, input int n, input logic per);
    int t;
    t = q - (M - 1);
    if (t >= 0) begin
      if (t % S == 0 && t / S < LH) return t / S;
      return -1;
    end
    if (!per) return -1;
    t = t + n;
    if (t >= 0 && t % S == 0 && t / S < LH) return t / S;
    return -1;
  endfunction

  logic [LH-1:0] pr [WL];  // rows placed, columns not yet

  always_comb begin
    for (int a = 0; a < WL; a++) begin
      int ia;
      ia = hid_index(a, int'(cfg.rows), cfg.per_row);
      pr[a] = (ia >= 0) ? h[ia] : '0;
    end
    for (int b = 0; b < WL; b++) begin
      int ib;
      ib = hid_index(b, int'(cfg.cols), cfg.per_col);
      for (int a = 0; a < WL; a++)
        p[a][b] = (ib >= 0) ? pr[a][ib] : 1'b0;
    end
  end

endmodule
