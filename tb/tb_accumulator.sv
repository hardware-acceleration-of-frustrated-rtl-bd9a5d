// tb_accumulator -- random per-filter maps and biases, with the odd/even bias option on
// and off; each output is compared with the saturated 12-bit sum. Extreme inputs in
// part of the runs exercise both saturation limits.
module tb_accumulator;
  import crbm_ref_pkg::*;
  localparam int NF = 4, R = 3, C = 4;
  logic signed [9:0]  y [NF][R][C];
  logic signed [11:0] vbe, vbo;
  logic               oe;
  logic signed [11:0] z [R][C];
  int checks = 0, failures = 0, sat_hits = 0;

  accumulator #(.NF(NF), .R(R), .C(C)) dut (.y(y), .vbias_even(vbe), .vbias_odd(vbo), .oddeven_bias(oe), .z(z));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int k = 0; k < NF; k++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
        y[k][r][c] = (t % 5 == 0) ? ((t % 10 == 0) ? 10'sd511 : -10'sd512) : 10'($urandom);
      vbe = 12'($urandom); vbo = 12'($urandom); oe = t[1];
      if (t % 5 == 0) begin vbe = (t % 10 == 0) ? 12'sd2047 : -12'sd2048; vbo = vbe; end
      #1;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        int acc, e;
        acc = (oe && c % 2 == 1) ? int'(vbo) : int'(vbe);
        for (int k = 0; k < NF; k++) acc += int'(y[k][r][c]);
        e = sat_ref(acc, 12);
        if (e != acc) sat_hits++;
        checks++;
        if (int'(z[r][c]) != e) begin failures++; if (failures < 5) $display("(%0d,%0d) got %0d exp %0d", r, c, z[r][c], e); end
      end
    end
    checks++; if (sat_hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
