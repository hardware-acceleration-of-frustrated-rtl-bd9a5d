// tb_crbm_ctrl -- runs of several lengths (including zero) with the FIFO-full input
// toggling at random; checks one init clock after start, exactly ncycles steps, no
// step while full, stall reporting, busy/done, and that a start while busy is ignored.
module tb_crbm_ctrl;
  logic clk = 0, rst_n = 0, start = 0, full = 0;
  logic [31:0] ncycles;
  logic init, step, stall, busy, done;
  int checks = 0, failures = 0;

  crbm_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .ncycles(ncycles), .out_full(full),
                 .init(init), .step(step), .stall(stall), .busy(busy), .done(done));
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int lens [5] = '{5, 1, 0, 37, 3};
    #12 rst_n = 1;
    foreach (lens[n]) begin
      int steps, inits, stalls, clocks;
      ncycles = 32'(lens[n]);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      checks++; if (!init || !busy || done) begin failures++; $display("run %0d: no init after start", n); end
      steps = 0; inits = 0; stalls = 0; clocks = 0;
      while (busy && clocks < 1000) begin
        full = ($urandom_range(2) == 0);
        if (n == 3 && clocks == 4) begin start = 1; end else start = 0;
        #1;
        if (init) inits++;
        if (step) steps++;
        if (stall) stalls++;
        checks++; if (step && full) failures++;
        checks++; if (stall != (busy && !init && full)) failures++;
        @(negedge clk); clocks++;
      end
      start = 0; full = 0;
      checks++; if (steps != lens[n]) begin failures++; $display("run %0d: %0d steps, expected %0d", n, steps, lens[n]); end
      checks++; if (inits != 1) begin failures++; $display("run %0d: %0d inits", n, inits); end
      checks++; if (!done || busy) failures++;
      if (lens[n] > 3) begin checks++; if (stalls == 0) begin failures++; $display("run %0d: no stall seen", n); end end
      repeat (3) @(negedge clk);
      checks++; if (!done || busy || step) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
