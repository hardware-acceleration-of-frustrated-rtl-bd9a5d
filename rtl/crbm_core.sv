// crbm_core -- two-stage pipelined, fully parallel Gibbs sampler of a convolutional RBM.
//
// The core holds the visible register V (L x L bits) and the hidden register H
// (NF groups of LH x LH bits, LH = floor((L+1)/S)). Every enabled clock both
// registers are rewritten at once:
//   forward stage (V -> H):  wrapper -> NF stride-S mask-and-accumulate convolutions
//     with filters w[k] and hidden biases hbias[k] -> NF sigmoid LUTs -> compare with
//     NF LFSR banks -> H
//   reverse stage (H -> V):  NF zero padders -> NF stride-1 convolutions with the
//     flipped filters wr[k] -> accumulator (+ visible bias) -> sigmoid LUT -> compare
//     with an LFSR bank -> V
// Each stage is one combinational pass per clock. Because H is computed from the old
// V and V from the old H in the same clock, the registers carry two independent
// chains: one that started from the random V loaded by `init`, one that started
// from the random H loaded with it. Each chain completes a visible update every two
// clocks, and the visible register shows a new sample every clock, alternating
// between the chains.
//
// Interface: `init` (one clock) loads random start values into both registers;
// `step` advances both stages; with neither, everything holds (stall). The LFSRs
// advance on either. `v_sample` is the value the visible register loads on `step`
// (so sample n is presented on the step that creates it); `v_q` and `h_q` are the
// registers. Weights are signed Q5.4 (CONV_W bits); the visible biases are Q7.4.
//
// The structure, the pipelining into two chains, the precisions and the sizes follow
// the published design. Supplying the flipped filters separately (rather than
// flipping w in hardware) also follows it; the visible bias is added in the
// accumulator as the text describes (the block diagram draws it at the reverse
// convolution).
module crbm_core
  import crbm_pkg::*;
#(
  parameter int L  = L_DEF,
  parameter int M  = M_DEF,
  parameter int S  = S_DEF,
  parameter int NF = NF_DEF,
  parameter int LH = (L + 1) / S
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     init,
  input  logic                     step,
  input  lattice_cfg_t             cfg,
  input  logic signed [CONV_W-1:0] w      [NF][M][M],
  input  logic signed [CONV_W-1:0] wr     [NF][M][M],
  input  logic signed [CONV_W-1:0] hbias  [NF],
  input  logic signed [ACC_W-1:0]  vbias_even,
  input  logic signed [ACC_W-1:0]  vbias_odd,
  output logic [L-1:0]             v_q      [L],
  output logic [L-1:0]             v_sample [L],
  output logic [LH-1:0]            h_q      [NF][LH]
);

  localparam int WL = L + M - 1;
  localparam int NH = LH * LH;
  localparam int NV = L * L;

  logic adv;
  assign adv = init | step;

  // ---------------- forward stage: V -> H ----------------
  logic [WL-1:0] vw [WL];

  lattice_wrapper #(.L(L), .M(M)) u_wrap (.v(v_q), .cfg(cfg), .vw(vw));

  logic signed [CONV_W-1:0] yf    [NF][LH][LH];
  logic signed [CONV_W-1:0] yf_fl [NF][NH];
  logic        [PROB_W-1:0] p_h   [NF][NH];
  logic        [PROB_W-1:0] rnd_h [NF][NH];
  logic        [NH-1:0]     s_h   [NF];
  logic        [LH-1:0]     h_new [NF][LH];
  logic        [LH-1:0]     h_rnd [NF][LH];

  for (genvar k = 0; k < NF; k++) begin : g_fwd
    conv_mask_acc #(
      .IN_R(WL), .IN_C(WL), .OUT_R(LH), .OUT_C(LH), .M(M), .S(S),
      .W_W(CONV_W), .OUT_W(CONV_W)
    ) u_conv (.x(vw), .w(w[k]), .bias(hbias[k]), .y(yf[k]));

    always_comb begin
      for (int i = 0; i < LH; i++)
        for (int j = 0; j < LH; j++) yf_fl[k][i*LH+j] = yf[k][i][j];
    end

    sigmoid_lut #(.LANES(NH), .IN_W(CONV_W), .FRAC(FRAC_W), .OUT_W(PROB_W))
      u_sig (.x(yf_fl[k]), .p(p_h[k]));

    lfsr_bank #(.LANES(NH), .SEED_BASE(k + 1))
      u_lfsr (.clk(clk), .rst_n(rst_n), .step(adv), .rnd(rnd_h[k]));

    stoch_compare #(.LANES(NH)) u_cmp (.p(p_h[k]), .rnd(rnd_h[k]), .s(s_h[k]));

    always_comb begin
      for (int i = 0; i < LH; i++)
        for (int j = 0; j < LH; j++) begin
          h_new[k][i][j] = s_h[k][i*LH+j];
          h_rnd[k][i][j] = rnd_h[k][i*LH+j][PROB_W-1];
        end
    end
  end

  hidden_node_reg #(.NF(NF), .LH(LH), .S(S)) u_hreg (
    .clk(clk), .rst_n(rst_n), .init(init), .upd(step),
    .init_bits(h_rnd), .d(h_new), .cfg(cfg), .q(h_q)
  );

  // ---------------- reverse stage: H -> V ----------------
  logic        [WL-1:0]     hp    [NF][WL];
  logic signed [CONV_W-1:0] yr    [NF][L][L];
  logic signed [ACC_W-1:0]  z     [L][L];
  logic signed [ACC_W-1:0]  z_fl  [NV];
  logic        [PROB_W-1:0] p_v   [NV];
  logic        [PROB_W-1:0] rnd_v [NV];
  logic        [NV-1:0]     s_v;
  logic        [L-1:0]      v_new [L];
  logic        [L-1:0]      v_rnd [L];

  for (genvar k = 0; k < NF; k++) begin : g_rev
    zero_padder #(.L(L), .M(M), .S(S), .LH(LH))
      u_pad (.h(h_q[k]), .cfg(cfg), .p(hp[k]));

    conv_mask_acc #(
      .IN_R(WL), .IN_C(WL), .OUT_R(L), .OUT_C(L), .M(M), .S(1),
      .W_W(CONV_W), .OUT_W(CONV_W)
    ) u_conv (.x(hp[k]), .w(wr[k]), .bias('0), .y(yr[k]));
  end

  accumulator #(.NF(NF), .R(L), .C(L), .IN_W(CONV_W), .OUT_W(ACC_W)) u_acc (
    .y(yr), .vbias_even(vbias_even), .vbias_odd(vbias_odd),
    .oddeven_bias(cfg.oddeven_bias), .z(z)
  );

  always_comb begin
    for (int r = 0; r < L; r++)
      for (int c = 0; c < L; c++) z_fl[r*L+c] = z[r][c];
  end

  sigmoid_lut #(.LANES(NV), .IN_W(ACC_W), .FRAC(FRAC_W), .OUT_W(PROB_W))
    u_sig_v (.x(z_fl), .p(p_v));

  lfsr_bank #(.LANES(NV), .SEED_BASE(NF + 1))
    u_lfsr_v (.clk(clk), .rst_n(rst_n), .step(adv), .rnd(rnd_v));

  stoch_compare #(.LANES(NV)) u_cmp_v (.p(p_v), .rnd(rnd_v), .s(s_v));

  always_comb begin
    for (int r = 0; r < L; r++)
      for (int c = 0; c < L; c++) begin
        v_new[r][c] = s_v[r*L+c];
        v_rnd[r][c] = rnd_v[r*L+c][PROB_W-1];
      end
  end

  visible_node_reg #(.L(L)) u_vreg (
    .clk(clk), .rst_n(rst_n), .init(init), .upd(step),
    .init_bits(v_rnd), .d(v_new), .cfg(cfg), .d_masked(v_sample), .q(v_q)
  );

endmodule
