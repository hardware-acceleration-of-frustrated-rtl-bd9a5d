// visible_node_reg -- the L x L register of one-bit visible nodes.
//
// Holds one bit per lattice spin (row r in word r, column c in bit c). On `init` it
// loads random bits (the start of the chain that begins from the visible layer); on
// `upd` it loads the freshly sampled bits `d`. Either way nodes outside the active
// rows x cols lattice are forced to zero, so a smaller lattice than L x L can be run.
// `init` wins over `upd`. `d_masked` is the value an `upd` would load, for the
// sample output path. Reset clears the register.
//
// One bit per node, all L*L in a single register, follows the published design;
// masking and the random start value source are this design's choices.
module visible_node_reg
  import crbm_pkg::*;
#(
  parameter int L = L_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic         upd,
  input  logic [L-1:0] init_bits [L],
  input  logic [L-1:0] d         [L],
  input  lattice_cfg_t cfg,
  output logic [L-1:0] d_masked  [L],
  output logic [L-1:0] q         [L]
);

  logic [L-1:0] mask   [L];
  logic [L-1:0] init_m [L];

  always_comb begin
    for (int r = 0; r < L; r++) begin
      for (int c = 0; c < L; c++)
        mask[r][c] = (r < int'(cfg.rows)) && (c < int'(cfg.cols));
      d_masked[r] = d[r] & mask[r];
      init_m[r]   = init_bits[r] & mask[r];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < L; r++) q[r] <= '0;
    end else if (init) begin
      q <= init_m;
    end else if (upd) begin
      q <= d_masked;
    end
  end

endmodule
