// lfsr_bank -- bank of 16-bit linear feedback shift registers, one lane per node.
//
// Each lane is a Fibonacci LFSR with taps 16, 14, 13, 11 (maximal length, period
// 65535). All lanes shift together when `step` is high; the 16-bit state, read as an
// unsigned fraction rnd/65536 of one, is the uniform random number a stochastic node
// compares its sigmoid probability with. Reset loads each lane with its own fixed
// seed (crbm_pkg::lane_seed(SEED_BASE, lane)).
//
// Following the published design, there is one LFSR module per filter group in the
// forward stage and one for the visible layer in the reverse stage, each 16 bits
// wide and synthesized with a fixed seed. That a module holds one independent lane
// per node of its group, the polynomial and the seed formula are this design's own
// choices (the source only says that the register is seeded and shuffled every
// cycle).
//
// Timing: rnd is the register output; it changes on the clock edge after `step`.
module lfsr_bank
  import crbm_pkg::*;
#(
  parameter int LANES     = 81,
  parameter int SEED_BASE = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              step,
  output logic [PROB_W-1:0] rnd [LANES]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LANES; i++) rnd[i] <= lane_seed(SEED_BASE, i);
    end else if (step) begin
      for (int i = 0; i < LANES; i++) rnd[i] <= lfsr_next(rnd[i]);
    end
  end

endmodule
