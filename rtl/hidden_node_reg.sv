// hidden_node_reg -- the NF groups of one-bit hidden nodes.
//
// Group k holds the LH x LH hidden nodes of filter k, LH = floor((L+1)/S) (9 for
// L = 18, S = 2, so 10 x 81 = 810 bits by default). On `init` it loads random bits
// (the start of the chain that begins from the hidden layer); on `upd` it loads the
// freshly sampled bits `d`. Only the floor((n+1)/S) active rows and columns (n = the
// active visible rows or columns) are kept, the rest are forced to zero. When
// cfg.clr_last_hrow is set, the last active hidden row of every group is forced to
// zero as well. `init` wins over `upd`; reset clears the register.
//
// The group size and the clear-last-hidden-row option follow the published design;
// the masking of inactive nodes is this design's choice.
module hidden_node_reg
  import crbm_pkg::*;
#(
  parameter int NF = NF_DEF,
  parameter int LH = (L_DEF + 1) / S_DEF,
  parameter int S  = S_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          upd,
  input  logic [LH-1:0] init_bits [NF][LH],
  input  logic [LH-1:0] d         [NF][LH],
  input  lattice_cfg_t  cfg,
  output logic [LH-1:0] q         [NF][LH]
);

  logic [LH-1:0] mask [LH];
  logic [LH-1:0] nxt  [NF][LH];

  always_comb begin
    int nr, nc;
    nr = (int'(cfg.rows) + 1) / S;
    nc = (int'(cfg.cols) + 1) / S;
    for (int i = 0; i < LH; i++)
      for (int j = 0; j < LH; j++)
        mask[i][j] = (i < nr) && (j < nc) && !(cfg.clr_last_hrow && i == nr - 1);
    for (int k = 0; k < NF; k++)
      for (int i = 0; i < LH; i++)
        nxt[k][i] = (init ? init_bits[k][i] : d[k][i]) & mask[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NF; k++)
        for (int i = 0; i < LH; i++) q[k][i] <= '0;
    end else if (init || upd) begin
      q <= nxt;
    end
  end

endmodule
