// tb_lattice_wrapper -- drives random 6x6 visible maps through the wrapper with every
// combination of active size (2..6) and row/column periodicity, and compares the
// 8x8 output with the modular-index definition of periodic and open boundaries.
module tb_lattice_wrapper;
  import crbm_pkg::*;
  localparam int L = 6, M = 3, WL = L + M - 1;
  logic [L-1:0]  v  [L];
  logic [WL-1:0] vw [WL];
  lattice_cfg_t  cfg;
  int checks = 0, failures = 0;

  lattice_wrapper #(.L(L), .M(M)) dut (.v(v), .cfg(cfg), .vw(vw));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int ext(input int x, input int n, input bit per);
    if (x < n) return x;
    if (per && x - n < M - 1) return x % n;
    return -1;
  endfunction

  initial begin
    for (int t = 0; t < 40; t++)
      for (int rows = 2; rows <= L; rows++)
        for (int pm = 0; pm < 4; pm++) begin
          int cols;
          cols = 2 + (t + rows) % (L - 1);
          for (int r = 0; r < L; r++) v[r] = L'($urandom);
          cfg = '{rows: 8'(rows), cols: 8'(cols), per_row: pm[0], per_col: pm[1], clr_last_hrow: 1'b0, oddeven_bias: 1'b0};
          #1;
          for (int r = 0; r < WL; r++)
            for (int c = 0; c < WL; c++) begin
              int sr, sc;
              logic e;
              sr = ext(r, rows, pm[0]);
              sc = ext(c, cols, pm[1]);
              e = (sr >= 0 && sc >= 0) ? v[sr][sc] : 1'b0;
              checks++;
              if (vw[r][c] !== e) begin failures++; if (failures < 5) $display("rows=%0d cols=%0d pm=%0d (%0d,%0d) got %0b", rows, cols, pm, r, c, vw[r][c]); end
            end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
