// tb_cfg_regs -- writes every register through the command interface in random order,
// with gaps and unknown addresses between, and checks each register, the mode bits,
// the 32-bit cycle count, the reset values and the one-clock start pulse.
module tb_cfg_regs;
  import crbm_pkg::*;
  localparam int L = 6, M = 3, NF = 3;
  logic clk = 0, rst_n = 0, valid = 0;
  logic [31:0] cmd;
  logic pop, start;
  logic signed [9:0]  w [NF][M][M], wr [NF][M][M], hb [NF];
  logic signed [11:0] vbe, vbo;
  lattice_cfg_t cfg;
  logic [31:0] ncyc;
  int checks = 0, failures = 0, starts = 0;
  int ew [NF][M][M], ewr [NF][M][M], ehb [NF];

  cfg_regs #(.L(L), .M(M), .NF(NF)) dut (.clk(clk), .rst_n(rst_n), .cmd_valid(valid), .cmd(cmd), .cmd_pop(pop),
    .w(w), .wr(wr), .hbias(hb), .vbias_even(vbe), .vbias_odd(vbo), .cfg(cfg), .ncycles(ncyc), .start(start));
  always #5 clk = ~clk;
  always @(posedge clk) if (start && rst_n) begin starts++; $display("start at %0t", $time); end
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic send(input logic [15:0] a, input logic [15:0] d);
    @(negedge clk); valid = 1; cmd = {a, d};
    #1; checks++; if (!pop) failures++;
    @(negedge clk); valid = 0; cmd = 32'hFFFF_FFFF;
    if ($urandom_range(1)) @(negedge clk);
  endtask

  initial begin
    #12;
    checks++; if (cfg.rows != L || cfg.cols != L || !cfg.per_row || !cfg.per_col || cfg.clr_last_hrow || ncyc != 0) failures++;
    rst_n = 1;
    for (int k = 0; k < NF; k++) begin
      ehb[k] = $urandom_range(1023) - 512;
      send(A_HBIAS + 16'(k), 16'(ehb[k]));
      for (int m = 0; m < M; m++) for (int n = 0; n < M; n++) begin
        ew[k][m][n] = $urandom_range(1023) - 512; ewr[k][m][n] = $urandom_range(1023) - 512;
        send(A_W + 16'(k*9 + m*3 + n), 16'(ew[k][m][n]));
        send(16'h0ABC, 16'h1234);                       // unknown address
        send(A_WR + 16'(k*9 + m*3 + n), 16'(ewr[k][m][n]));
      end
    end
    send(A_VB_EV, 16'(-700)); send(A_VB_OD, 16'(1234));
    send(A_ROWS, 16'd4); send(A_COLS, 16'd5); send(A_MODE, 16'b1010);
    send(A_NCYC_L, 16'hBEEF); send(A_NCYC_H, 16'h0012);
    checks++; if (starts != 0) begin failures++; $display("early start"); end
    for (int k = 0; k < NF; k++) begin
      checks++; if (int'(hb[k]) != ehb[k]) failures++;
      for (int m = 0; m < M; m++) for (int n = 0; n < M; n++) begin
        checks++; if (int'(w[k][m][n]) != ew[k][m][n]) begin failures++; if (failures < 5) $display("w %0d%0d%0d %0d exp %0d", k, m, n, w[k][m][n], ew[k][m][n]); end
        checks++; if (int'(wr[k][m][n]) != ewr[k][m][n]) failures++;
      end
    end
    checks++; if (int'(vbe) != -700 || int'(vbo) != 1234) begin failures++; $display("vb %0d %0d", vbe, vbo); end
    checks++; if (cfg.rows != 4 || cfg.cols != 5) failures++;
    checks++; if (cfg.per_row || !cfg.per_col || cfg.clr_last_hrow || !cfg.oddeven_bias) begin failures++; $display("mode %p", cfg); end
    checks++; if (ncyc != 32'h0012_BEEF) begin failures++; $display("ncyc %h", ncyc); end
    send(A_START, 16'd0);
    repeat (2) @(negedge clk);
    checks++; if (starts != 1) begin failures++; $display("starts=%0d", starts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
