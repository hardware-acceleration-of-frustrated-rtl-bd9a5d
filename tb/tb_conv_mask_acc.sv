// tb_conv_mask_acc -- random binary maps and signed 10-bit filters through a stride-2
// (forward-shaped) and a stride-1 (reverse-shaped) instance; each output is compared
// with a direct sum of the selected weights plus bias, saturated to 10 bits. Large
// weights are used in part of the runs so that both saturation limits are hit.
module tb_conv_mask_acc;
  import crbm_ref_pkg::*;
  logic        [7:0] x  [8];
  logic signed [9:0] w  [3][3];
  logic signed [9:0] b;
  logic signed [9:0] y2 [3][3];
  logic signed [9:0] y1 [6][6];
  int checks = 0, failures = 0, sat_hits = 0;

  conv_mask_acc #(.IN_R(8), .IN_C(8), .OUT_R(3), .OUT_C(3), .M(3), .S(2)) dut2 (.x(x), .w(w), .bias(b), .y(y2));
  conv_mask_acc #(.IN_R(8), .IN_C(8), .OUT_R(6), .OUT_C(6), .M(3), .S(1)) dut1 (.x(x), .w(w), .bias('0), .y(y1));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int range;
      range = (t % 4 == 0) ? 512 : 64;
      for (int r = 0; r < 8; r++) x[r] = 8'($urandom);
      for (int m = 0; m < 3; m++) for (int n = 0; n < 3; n++) w[m][n] = 10'($urandom_range(2*range - 1) - range);
      b = 10'($urandom_range(2*range - 1) - range);
      #1;
      for (int s = 1; s <= 2; s++)
        for (int i = 0; i < (s == 2 ? 3 : 6); i++)
          for (int j = 0; j < (s == 2 ? 3 : 6); j++) begin
            int acc, e, got;
            acc = (s == 2) ? int'(b) : 0;
            for (int m = 0; m < 3; m++) for (int n = 0; n < 3; n++)
              if (x[s*i+m][s*j+n]) acc += int'(w[m][n]);
            e = sat_ref(acc, 10);
            if (e != acc) sat_hits++;
            got = (s == 2) ? int'(y2[i][j]) : int'(y1[i][j]);
            checks++;
            if (got != e) begin failures++; if (failures < 5) $display("s=%0d (%0d,%0d) got %0d exp %0d", s, i, j, got, e); end
          end
    end
    checks++; if (sat_hits == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
