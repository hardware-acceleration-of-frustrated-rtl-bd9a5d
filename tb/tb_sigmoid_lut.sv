// tb_sigmoid_lut -- checks every input code of the 10-bit and the 12-bit sigmoid tables
// against a floating-point logistic function, and that each table is monotonic.
module tb_sigmoid_lut;
  import crbm_ref_pkg::*;
  logic signed [9:0]  x10 [2];
  logic        [15:0] p10 [2];
  logic signed [11:0] x12 [2];
  logic        [15:0] p12 [2];
  int checks = 0, failures = 0;

  sigmoid_lut #(.LANES(2), .IN_W(10), .FRAC(4), .OUT_W(16)) dut10 (.x(x10), .p(p10));
  sigmoid_lut #(.LANES(2), .IN_W(12), .FRAC(4), .OUT_W(16)) dut12 (.x(x12), .p(p12));

  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int prev;
    prev = -1;
    for (int v = -512; v < 512; v++) begin
      x10[0] = 10'(v); x10[1] = 10'(-v - 1);
      #1;
      checks++; if (int'(p10[0]) != sigmoid_ref(v)) begin failures++; if (failures < 5) $display("10b x=%0d p=%0d exp %0d", v, p10[0], sigmoid_ref(v)); end
      checks++; if (int'(p10[1]) != sigmoid_ref(-v - 1)) failures++;
      checks++; if (int'(p10[0]) < prev) failures++;
      prev = int'(p10[0]);
    end
    prev = -1;
    for (int v = -2048; v < 2048; v++) begin
      x12[0] = 12'(v); x12[1] = 12'(v);
      #1;
      checks++; if (int'(p12[0]) != sigmoid_ref(v)) begin failures++; if (failures < 5) $display("12b x=%0d p=%0d exp %0d", v, p12[0], sigmoid_ref(v)); end
      checks++; if (int'(p12[0]) < prev) failures++;
      prev = int'(p12[0]);
    end
    // spot values: sigmoid(0) = 1/2, sigmoid(1) = 0.7311
    x10[0] = 0; x10[1] = 10'sd16; #1;
    checks++; if (p10[0] != 16'd32768) failures++;
    checks++; if (p10[1] != 16'd47911) begin failures++; $display("sig(1) %0d", p10[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
