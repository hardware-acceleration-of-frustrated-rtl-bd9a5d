// tb_stoch_compare -- checks the probability-versus-random comparison, including ties
// and the extremes, on random and directed values.
module tb_stoch_compare;
  localparam int LANES = 8;
  logic [15:0] p [LANES], rnd [LANES];
  logic [LANES-1:0] s;
  int checks = 0, failures = 0;

  stoch_compare #(.LANES(LANES)) dut (.p(p), .rnd(rnd), .s(s));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int l = 0; l < LANES; l++) begin
        p[l]   = 16'($urandom);
        rnd[l] = (l == 0) ? p[l] : (l == 1) ? p[l] + 16'd1 : (l == 2) ? p[l] - 16'd1 : 16'($urandom);
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        bit e;
        e = int'(p[l]) > int'(rnd[l]);
        checks++; if (s[l] !== e) begin failures++; if (failures < 5) $display("p=%0d rnd=%0d s=%0b", p[l], rnd[l], s[l]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
