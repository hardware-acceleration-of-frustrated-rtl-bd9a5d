// tb_lfsr_bank -- checks the LFSR bank against an independent shift-register model:
// reset seeds (distinct and non-zero), 300 steps of every lane, holding when `step`
// is low, and that a lane's values are spread over the whole 16-bit range.
module tb_lfsr_bank;
  import crbm_ref_pkg::*;
  localparam int LANES = 6;
  localparam int BASE  = 3;
  logic clk = 0, rst_n = 0, step = 0;
  logic [15:0] rnd [LANES];
  logic [15:0] model [LANES];
  int checks = 0, failures = 0;

  lfsr_bank #(.LANES(LANES), .SEED_BASE(BASE)) dut (.clk(clk), .rst_n(rst_n), .step(step), .rnd(rnd));

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int hi_cnt;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < LANES; l++) begin
      logic [15:0] s;
      s = 16'((l + 1) * 40503) ^ 16'(BASE * 15467);
      if (s == 0) s = 16'hACE1;
      model[l] = s;
      checks++; if (rnd[l] !== s || rnd[l] == 0) begin failures++; $display("seed lane %0d %h exp %h", l, rnd[l], s); end
      for (int o = 0; o < l; o++) begin checks++; if (rnd[o] == rnd[l]) failures++; end
    end
    hi_cnt = 0;
    for (int t = 0; t < 300; t++) begin
      step = (t % 7 != 3);
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        if (step) model[l] = lfsr_ref(model[l]);
        checks++; if (rnd[l] !== model[l]) begin failures++; if (failures < 5) $display("t=%0d lane %0d %h exp %h", t, l, rnd[l], model[l]); end
      end
      if (rnd[0][15]) hi_cnt++;
    end
    checks++; if (hi_cnt < 100 || hi_cnt > 200) begin failures++; $display("MSB ones %0d of 300", hi_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
