// tb_visible_node_reg -- reset value, random initial load, sample load, hold, priority of
// init over upd, and masking of nodes outside the active rows x cols, for random
// sizes; the register is compared with a model after every clock.
module tb_visible_node_reg;
  import crbm_pkg::*;
  localparam int L = 5;
  logic clk = 0, rst_n = 0, init = 0, upd = 0;
  logic [L-1:0] ib [L], d [L], dm [L], q [L];
  lattice_cfg_t cfg;
  logic [L-1:0] model [L];
  int checks = 0, failures = 0;

  visible_node_reg #(.L(L)) dut (.clk(clk), .rst_n(rst_n), .init(init), .upd(upd), .init_bits(ib),
                                 .d(d), .cfg(cfg), .d_masked(dm), .q(q));
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    cfg = '{rows: 8'(L), cols: 8'(L), per_row: 1'b1, per_col: 1'b1, clr_last_hrow: 1'b0, oddeven_bias: 1'b0};
    for (int r = 0; r < L; r++) begin ib[r] = '1; d[r] = '1; end
    #12;
    for (int r = 0; r < L; r++) begin checks++; if (q[r] != 0) failures++; end
    rst_n = 1;
    for (int r = 0; r < L; r++) model[r] = '0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      init = ($urandom_range(9) == 0); upd = $urandom_range(1);
      cfg.rows = 8'($urandom_range(L, 1)); cfg.cols = 8'($urandom_range(L, 1));
      for (int r = 0; r < L; r++) begin ib[r] = L'($urandom); d[r] = L'($urandom); end
      #1;
      for (int r = 0; r < L; r++) for (int c = 0; c < L; c++) begin
        logic act;
        act = (r < cfg.rows) && (c < cfg.cols);
        checks++; if (dm[r][c] !== (d[r][c] & act)) failures++;
        if (init) model[r][c] = ib[r][c] & act;
        else if (upd) model[r][c] = d[r][c] & act;
      end
      @(posedge clk); #1;
      for (int r = 0; r < L; r++) begin
        checks++; if (q[r] !== model[r]) begin failures++; if (failures < 5) $display("t=%0d row %0d q=%b exp %b", t, r, q[r], model[r]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
