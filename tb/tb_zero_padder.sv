// tb_zero_padder -- checks that the padded hidden map makes a stride-1 convolution with
// the flipped filter equal to the transpose of the stride-2 forward convolution:
// for random hidden groups and random integer filters, sum_{m',n'} wr[m'][n'] *
// p[r+m'][c+n'] must equal the sum over all hidden nodes whose forward window
// covers visible node (r, c), for open and periodic boundaries and several sizes.
module tb_zero_padder;
  import crbm_pkg::*;
  import crbm_ref_pkg::*;
  localparam int L = 8, M = 3, S = 2, LH = (L + 1) / S, WL = L + M - 1;
  logic [LH-1:0] h [LH];
  logic [WL-1:0] p [WL];
  lattice_cfg_t  cfg;
  int checks = 0, failures = 0;

  zero_padder #(.L(L), .M(M), .S(S), .LH(LH)) dut (.h(h), .cfg(cfg), .p(p));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int wt [3][3];
    for (int t = 0; t < 60; t++)
      for (int rows = 3; rows <= L; rows++)
        for (int pm = 0; pm < 4; pm++) begin
          int cols, nr, nc;
          cols = 3 + (t * 3 + rows) % (L - 2);
          nr = (rows + 1) / S; nc = (cols + 1) / S;
          for (int i = 0; i < LH; i++) h[i] = LH'($urandom);
          for (int i = 0; i < LH; i++) for (int j = 0; j < LH; j++) if (i >= nr || j >= nc) h[i][j] = 1'b0;
          for (int m = 0; m < 3; m++) for (int n = 0; n < 3; n++) wt[m][n] = 1 << (m * 3 + n);
          cfg = '{rows: 8'(rows), cols: 8'(cols), per_row: pm[0], per_col: pm[1], clr_last_hrow: 1'b0, oddeven_bias: 1'b0};
          #1;
          for (int r = 0; r < rows; r++)
            for (int c = 0; c < cols; c++) begin
              int got, e;
              got = 0;
              for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
                if (p[r+a][c+b]) got += wt[2-a][2-b];
              e = 0;
              for (int i = 0; i < nr; i++) for (int j = 0; j < nc; j++)
                if (h[i][j])
                  for (int m = 0; m < 3; m++) for (int n = 0; n < 3; n++)
                    if (idx_ref(S*i+m, rows, pm[0]) == r && idx_ref(S*j+n, cols, pm[1]) == c) e += wt[m][n];
              checks++;
              if (got != e) begin failures++; if (failures < 5) $display("rows=%0d cols=%0d pm=%0d (%0d,%0d) got %0h exp %0h", rows, cols, pm, r, c, got, e); end
            end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
