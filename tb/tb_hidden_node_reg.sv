// tb_hidden_node_reg -- random loads of a 2-group, 4x4 hidden register under random
// lattice sizes, with and without the clear-last-hidden-row flag; checks the active
// window floor((n+1)/2), the cleared row, hold, and init priority after every clock.
module tb_hidden_node_reg;
  import crbm_pkg::*;
  localparam int NF = 2, LH = 4, S = 2;
  logic clk = 0, rst_n = 0, init = 0, upd = 0;
  logic [LH-1:0] ib [NF][LH], d [NF][LH], q [NF][LH];
  logic [LH-1:0] model [NF][LH];
  lattice_cfg_t cfg;
  int checks = 0, failures = 0, cleared = 0;

  hidden_node_reg #(.NF(NF), .LH(LH), .S(S)) dut (.clk(clk), .rst_n(rst_n), .init(init), .upd(upd),
                                                   .init_bits(ib), .d(d), .cfg(cfg), .q(q));
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    cfg = '{rows: 8'd8, cols: 8'd8, per_row: 1'b1, per_col: 1'b1, clr_last_hrow: 1'b0, oddeven_bias: 1'b0};
    for (int k = 0; k < NF; k++) for (int i = 0; i < LH; i++) model[k][i] = '0;
    #12 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      init = ($urandom_range(7) == 0); upd = $urandom_range(1);
      cfg.rows = 8'($urandom_range(8, 2)); cfg.cols = 8'($urandom_range(8, 2));
      cfg.clr_last_hrow = $urandom_range(1);
      for (int k = 0; k < NF; k++) for (int i = 0; i < LH; i++) begin ib[k][i] = LH'($urandom); d[k][i] = LH'($urandom); end
      for (int k = 0; k < NF; k++) for (int i = 0; i < LH; i++) for (int j = 0; j < LH; j++) begin
        int nr, nc;
        logic act;
        nr = (cfg.rows + 1) / 2; nc = (cfg.cols + 1) / 2;
        act = (i < nr) && (j < nc) && !(cfg.clr_last_hrow && i == nr - 1);
        if (cfg.clr_last_hrow && i == nr - 1 && (init || upd)) cleared++;
        if (init) model[k][i][j] = ib[k][i][j] & act;
        else if (upd) model[k][i][j] = d[k][i][j] & act;
      end
      @(posedge clk); #1;
      for (int k = 0; k < NF; k++) for (int i = 0; i < LH; i++) begin
        checks++; if (q[k][i] !== model[k][i]) begin failures++; if (failures < 5) $display("t=%0d g%0d row %0d q=%b exp %b", t, k, i, q[k][i], model[k][i]); end
      end
    end
    checks++; if (cleared == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
