// crbm_top -- convolutional RBM sampling accelerator.
//
// Two clock domains. On the host-bus side (`bus_clk`) the design offers the two
// FIFO streams a PCIe-to-FIFO bridge provides: a 32-bit command stream written by
// the host and a sample stream read by it, one word of L*L bits per sample (bit
// r*L + c is visible node (r, c)). On the core side (`clk`, 30 MHz in the published
// FPGA build) the command decoder fills the problem registers, the run controller
// sequences a run, and the sampling core produces one visible sample per clock,
// alternating between its two interleaved Gibbs chains.
//
//   host cmd stream -> async_fifo -> cfg_regs -> {filters, biases, lattice cfg, ncycles}
//   cfg_regs.start  -> crbm_ctrl -> init / step -> crbm_core
//   crbm_core.v_sample (on step) -> async_fifo -> host sample stream
//
// A run: the host writes filters, flipped filters, biases, size, mode and cycle
// count, then the start word. The core is initialised with random registers and
// then takes `ncycles` steps, each pushing one sample; when the sample FIFO is full
// the core stalls until the host reads. `busy`/`done` (core clock) report progress.
//
// The PCIe block and the bridge IP themselves are not part of this RTL; their FIFO
// side connects to the host_* ports.
module crbm_top
  import crbm_pkg::*;
#(
  parameter int L      = L_DEF,
  parameter int M      = M_DEF,
  parameter int S      = S_DEF,
  parameter int NF     = NF_DEF,
  parameter int CMD_AW = 4,   // command FIFO depth 2^CMD_AW
  parameter int SMP_AW = 4    // sample FIFO depth 2^SMP_AW
) (
  input  logic              bus_clk,
  input  logic              bus_rst_n,
  input  logic              clk,
  input  logic              rst_n,
  // host command stream (bus_clk)
  input  logic              host_wr_en,
  input  logic [HOST_W-1:0] host_wr_data,
  output logic              host_wr_full,
  // host sample stream (bus_clk, show-ahead)
  input  logic              host_rd_en,
  output logic [L*L-1:0]    host_rd_data,
  output logic              host_rd_empty,
  // status (clk)
  output logic              busy,
  output logic              done
);

  localparam int LH = (L + 1) / S;

  // ---------------- command path ----------------
  logic [HOST_W-1:0] cmd;
  logic              cmd_empty, cmd_pop;

  async_fifo #(.WIDTH(HOST_W), .AW(CMD_AW)) u_cmd_fifo (
    .wr_clk(bus_clk), .wr_rst_n(bus_rst_n), .wr_en(host_wr_en), .din(host_wr_data),
    .full(host_wr_full),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en(cmd_pop), .dout(cmd), .empty(cmd_empty)
  );

  logic signed [CONV_W-1:0] w     [NF][M][M];
  logic signed [CONV_W-1:0] wr    [NF][M][M];
  logic signed [CONV_W-1:0] hbias [NF];
  logic signed [ACC_W-1:0]  vbias_even, vbias_odd;
  lattice_cfg_t             cfg;
  logic [31:0]              ncycles;
  logic                     start;

  cfg_regs #(.L(L), .M(M), .NF(NF)) u_cfg (
    .clk(clk), .rst_n(rst_n), .cmd_valid(!cmd_empty), .cmd(cmd), .cmd_pop(cmd_pop),
    .w(w), .wr(wr), .hbias(hbias), .vbias_even(vbias_even), .vbias_odd(vbias_odd),
    .cfg(cfg), .ncycles(ncycles), .start(start)
  );

  // ---------------- control ----------------
  logic init, step, stall, smp_full;

  crbm_ctrl u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .ncycles(ncycles), .out_full(smp_full),
    .init(init), .step(step), .stall(stall), .busy(busy), .done(done)
  );

  // ---------------- sampler ----------------
  logic [L-1:0]  v_q      [L];
  logic [L-1:0]  v_sample [L];
  logic [LH-1:0] h_q      [NF][LH];

  crbm_core #(.L(L), .M(M), .S(S), .NF(NF), .LH(LH)) u_core (
    .clk(clk), .rst_n(rst_n), .init(init), .step(step), .cfg(cfg),
    .w(w), .wr(wr), .hbias(hbias), .vbias_even(vbias_even), .vbias_odd(vbias_odd),
    .v_q(v_q), .v_sample(v_sample), .h_q(h_q)
  );

  // ---------------- sample path ----------------
  logic [L*L-1:0] smp_word;
  always_comb begin
    for (int r = 0; r < L; r++)
      for (int c = 0; c < L; c++) smp_word[r*L+c] = v_sample[r][c];
  end

  async_fifo #(.WIDTH(L*L), .AW(SMP_AW)) u_smp_fifo (
    .wr_clk(clk), .wr_rst_n(rst_n), .wr_en(step), .din(smp_word), .full(smp_full),
    .rd_clk(bus_clk), .rd_rst_n(bus_rst_n), .rd_en(host_rd_en), .dout(host_rd_data),
    .empty(host_rd_empty)
  );

endmodule
