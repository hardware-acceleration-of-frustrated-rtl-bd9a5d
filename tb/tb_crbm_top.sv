// tb_crbm_top -- end-to-end test of the accelerator at its default size (18 x 18
// lattice, 10 filters, 810 hidden nodes), through the host streams only.
//
// A host process on a 125 MHz bus clock writes the problem (random filters, flipped
// filters, biases, size, mode, cycle count) and the start word into the command
// stream, then reads the samples. The core runs on a 30 MHz clock. A mirror process
// computes, before each core step, the sample the core must produce from its
// hidden register and visible-layer random numbers (with crbm_ref_pkg and the
// weights the host wrote), and checks every hidden update the same way; the host
// compares each sample it reads with the mirror's queue.
// Four runs: periodic 18 x 18 with the host pausing its reads (the sample FIFO fills
// and the core stalls); laterally open 18 x 12 with separate odd-column bias;
// periodic with the last hidden row cleared; a 6 x 6 periodic sub-lattice. Each
// mechanism is counted and one that never happens is a failure.
`timescale 1ns/1ps
module tb_crbm_top;
  import crbm_pkg::*;
  import crbm_ref_pkg::*;
  localparam int L = 18, NF = 10, M = 3, LH = 9;

  logic bus_clk = 0, clk = 0, bus_rst_n = 0, rst_n = 0;
  logic host_wr_en = 0, host_wr_full, host_rd_en = 0, host_rd_empty, busy, done;
  logic [31:0]    host_wr_data = 0;
  logic [L*L-1:0] host_rd_data;

  crbm_top dut (
    .bus_clk(bus_clk), .bus_rst_n(bus_rst_n), .clk(clk), .rst_n(rst_n),
    .host_wr_en(host_wr_en), .host_wr_data(host_wr_data), .host_wr_full(host_wr_full),
    .host_rd_en(host_rd_en), .host_rd_data(host_rd_data), .host_rd_empty(host_rd_empty),
    .busy(busy), .done(done));

  always #4      bus_clk = ~bus_clk;
  always #16.667 clk     = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_cmd_full = 0, n_periodic = 0, n_open = 0, n_oddeven = 0, n_clr = 0, n_sub = 0, n_samples = 0;

  initial begin
    #20ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host-side problem copy ----------------
  filt_t fw, fwr;
  bias_t fhb;
  int vbe, vbo;
  lattice_cfg_t hcfg;
  logic [L*L-1:0] expq [$];

  task automatic host_write(input logic [15:0] a, input logic [15:0] d);
    @(negedge bus_clk);
    while (host_wr_full) begin n_cmd_full++; @(negedge bus_clk); end
    host_wr_en = 1; host_wr_data = {a, d};
    @(negedge bus_clk);
    host_wr_en = 0;
  endtask

  task automatic program_problem(input lattice_cfg_t c, input int ncyc);
    for (int k = 0; k < NF; k++) begin
      fhb[k] = $urandom_range(40) - 20;
      host_write(A_HBIAS + 16'(k), 16'(fhb[k]));
      for (int m = 0; m < M; m++) for (int n = 0; n < M; n++) begin
        fw[k][m][n]  = $urandom_range(60) - 30;
        fwr[k][m][n] = $urandom_range(60) - 30;
        host_write(A_W  + 16'(k*9 + m*3 + n), 16'(fw[k][m][n]));
        host_write(A_WR + 16'(k*9 + m*3 + n), 16'(fwr[k][m][n]));
      end
    end
    vbe = $urandom_range(60) - 30; vbo = $urandom_range(60) - 30;
    host_write(A_VB_EV, 16'(vbe)); host_write(A_VB_OD, 16'(vbo));
    host_write(A_ROWS, 16'(c.rows)); host_write(A_COLS, 16'(c.cols));
    host_write(A_MODE, {12'd0, c.oddeven_bias, c.clr_last_hrow, c.per_col, c.per_row});
    host_write(A_NCYC_L, 16'(ncyc)); host_write(A_NCYC_H, 16'(ncyc >> 16));
    hcfg = c;
  endtask

  // ---------------- mirror of the core ----------------
  hmap_t eh;
  bit    check_h = 0;
  always @(negedge clk) begin
    if (rst_n && dut.step) begin
      vmap_t v, vf;
      hmap_t h, hf;
      logic [L*L-1:0] word;
      for (int r = 0; r < LM; r++) for (int c = 0; c < LM; c++) v[r][c] = int'(dut.u_core.v_q[r][c]);
      for (int k = 0; k < NFM; k++) for (int i = 0; i < LM; i++) for (int j = 0; j < LM; j++)
        h[k][i][j] = (i < LH && j < LH) ? int'(dut.u_core.h_q[k][i][j]) : 0;
      vf = vis_field(h, fwr, vbe, vbo, hcfg.oddeven_bias, NF, hcfg.rows, hcfg.cols, hcfg.per_row, hcfg.per_col);
      hf = hid_field(v, fw, fhb, NF, hcfg.rows, hcfg.cols, hcfg.per_row, hcfg.per_col);
      for (int r = 0; r < L; r++) for (int c = 0; c < L; c++)
        word[r*L+c] = (r < hcfg.rows && c < hcfg.cols) && (sigmoid_ref(vf[r][c]) > int'(dut.u_core.rnd_v[r*L+c]));
      expq.push_back(word);
      for (int k = 0; k < NF; k++) for (int i = 0; i < LH; i++) for (int j = 0; j < LH; j++) begin
        int nr, nc;
        bit act;
        nr = (hcfg.rows + 1) / 2; nc = (hcfg.cols + 1) / 2;
        act = (i < nr) && (j < nc) && !(hcfg.clr_last_hrow && i == nr - 1);
        eh[k][i][j] = (act && sigmoid_ref(hf[k][i][j]) > int'(dut.u_core.rnd_h[k][i*LH+j])) ? 1 : 0;
      end
      check_h = 1;
    end
    if (rst_n && dut.stall) n_stall++;
  end

  always @(posedge clk) begin
    if (check_h) begin
      #1;
      check_h = 0;
      for (int k = 0; k < NF; k++) for (int i = 0; i < LH; i++) for (int j = 0; j < LH; j++) begin
        checks++;
        if (int'(dut.u_core.h_q[k][i][j]) != eh[k][i][j]) begin
          failures++;
          if (failures < 6) $display("hidden %0d (%0d,%0d) = %0b, expected %0d", k, i, j, dut.u_core.h_q[k][i][j], eh[k][i][j]);
        end
      end
      if (hcfg.clr_last_hrow) begin
        int nr;
        nr = (hcfg.rows + 1) / 2;
        for (int k = 0; k < NF; k++) begin checks++; if (dut.u_core.h_q[k][nr-1] != 0) failures++; end
      end
    end
  end

  // ---------------- host sample reader ----------------
  task automatic read_run(input int ncyc, input int pause_ns);
    int got;
    got = 0;
    if (pause_ns > 0) #(pause_ns * 1ns);
    while (got < ncyc) begin
      @(negedge bus_clk);
      host_rd_en = !host_rd_empty && ($urandom_range(3) != 0);
      if (host_rd_en) begin
        logic [L*L-1:0] e;
        checks++;
        if (expq.size() == 0) begin failures++; $display("sample without a step"); end
        else begin
          e = expq.pop_front();
          if (host_rd_data !== e) begin
            failures++;
            if (failures < 6) $display("sample %0d differs in %0d bits", got, $countones(host_rd_data ^ e));
          end
        end
        got++; n_samples++;
      end
    end
    @(negedge bus_clk); host_rd_en = 0;
  endtask

  task automatic run(input lattice_cfg_t c, input int ncyc, input int pause_ns);
    program_problem(c, ncyc);
    host_write(A_START, 16'd0);
    read_run(ncyc, pause_ns);
    repeat (20) @(negedge clk);
    checks++; if (!done || busy) begin failures++; $display("run not finished"); end
    checks++; if (!host_rd_empty || expq.size() != 0) begin failures++; $display("extra samples"); end
  endtask

  initial begin
    lattice_cfg_t c;
    #100 bus_rst_n = 1; rst_n = 1;
    c = '{rows: 8'd18, cols: 8'd18, per_row: 1'b1, per_col: 1'b1, clr_last_hrow: 1'b0, oddeven_bias: 1'b0};
    run(c, 48, 3000); n_periodic++;
    c = '{rows: 8'd18, cols: 8'd12, per_row: 1'b1, per_col: 1'b0, clr_last_hrow: 1'b0, oddeven_bias: 1'b1};
    run(c, 24, 0); n_open++; n_oddeven++;
    c = '{rows: 8'd18, cols: 8'd18, per_row: 1'b1, per_col: 1'b1, clr_last_hrow: 1'b1, oddeven_bias: 1'b0};
    run(c, 16, 0); n_clr++;
    c = '{rows: 8'd6, cols: 8'd6, per_row: 1'b1, per_col: 1'b1, clr_last_hrow: 1'b0, oddeven_bias: 1'b0};
    run(c, 16, 0); n_sub++;
    $display("samples=%0d stall_cycles=%0d cmd_full=%0d periodic=%0d open=%0d oddeven=%0d clear_row=%0d sub_lattice=%0d",
             n_samples, n_stall, n_cmd_full, n_periodic, n_open, n_oddeven, n_clr, n_sub);
    checks++; if (n_stall == 0)    begin failures++; $display("never stalled"); end
    checks++; if (n_cmd_full == 0) begin failures++; $display("command FIFO never full"); end
    checks++; if (n_samples != 104) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
