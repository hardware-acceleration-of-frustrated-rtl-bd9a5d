// crbm_pkg -- constants and shared types of the convolutional RBM (CRBM) sampler.
//
// The default sizes are those of the 18x18 Shastry-Sutherland configuration: an
// L x L = 18 x 18 lattice of one-bit visible nodes, NF = 10 filters of M x M = 3 x 3,
// stride S = 2, giving NF x 9 x 9 = 810 hidden nodes. Convolution values are signed
// fixed point with 1 sign, 5 integer and 4 fraction bits (CONV_W = 10); the
// accumulator adds 2 guard bits (ACC_W = 12). Probabilities and random numbers are
// 16-bit fractions of one. These numbers follow the published design.
//
// The host command word format and the address map below are this design's own
// choice: the published design only lists what the host writes (weights, flipped
// weights, biases, lattice size, periodicity, a clear-last-hidden-row flag and the
// number of sampling cycles), not how it is encoded.
//
// Host word (32 bits): [31:16] register address, [15:0] data.
//   0x0000 + k*M*M + m*M + n   forward filter k, row m, column n  (data[9:0], Q5.4)
//   0x0100 + k*M*M + m*M + n   flipped (reverse) filter            (data[9:0], Q5.4)
//   0x0200 + k                 hidden bias of filter k             (data[9:0], Q5.4)
//   0x0300 / 0x0301            visible bias, even / odd columns    (data[11:0], Q7.4)
//   0x0400 / 0x0401            active rows / columns               (data[7:0])
//   0x0402                     mode: [0] periodic rows, [1] periodic columns,
//                              [2] clear last hidden row, [3] separate odd-column bias
//   0x0404 / 0x0405            number of sampling cycles, low / high 16 bits
//   0x0406                     start a run (data ignored)
package crbm_pkg;

  localparam int L_DEF   = 18;  // lattice side
  localparam int M_DEF   = 3;   // filter side
  localparam int S_DEF   = 2;   // forward stride
  localparam int NF_DEF  = 10;  // number of filters / hidden groups
  localparam int CONV_W  = 10;  // convolution word: 1 sign, 5 integer, 4 fraction bits
  localparam int ACC_W   = 12;  // accumulator word: 2 guard bits over CONV_W
  localparam int FRAC_W  = 4;   // fraction bits of both words
  localparam int PROB_W  = 16;  // sigmoid output and LFSR word
  localparam int HOST_W  = 32;  // host stream word

  // Runtime lattice settings written by the host.
  typedef struct packed {
    logic [7:0] rows;           // active visible rows    (1..L)
    logic [7:0] cols;           // active visible columns (1..L)
    logic       per_row;        // periodic boundary along the row index
    logic       per_col;        // periodic boundary along the column index
    logic       clr_last_hrow;  // force the last active hidden row to zero
    logic       oddeven_bias;   // odd columns use their own visible bias
  } lattice_cfg_t;

  // Host register addresses.
  localparam logic [15:0] A_W      = 16'h0000;
  localparam logic [15:0] A_WR     = 16'h0100;
  localparam logic [15:0] A_HBIAS  = 16'h0200;
  localparam logic [15:0] A_VB_EV  = 16'h0300;
  localparam logic [15:0] A_VB_OD  = 16'h0301;
  localparam logic [15:0] A_ROWS   = 16'h0400;
  localparam logic [15:0] A_COLS   = 16'h0401;
  localparam logic [15:0] A_MODE   = 16'h0402;
  localparam logic [15:0] A_NCYC_L = 16'h0404;
  localparam logic [15:0] A_NCYC_H = 16'h0405;
  localparam logic [15:0] A_START  = 16'h0406;

  // Seed of LFSR lane `lane` in a bank with base seed `base`. Multiplying by an odd
  // constant modulo 2^16 is a bijection, so lanes of one bank get distinct seeds;
  // the all-zero lock-up state is replaced.
  function automatic logic [15:0] lane_seed(input int base, input int lane);
    logic [15:0] s;
    s = 16'((lane + 1) * 16'h9E37) ^ 16'(base * 16'h3C6B);
    if (s == 16'h0000) s = 16'hACE1;
    return s;
  endfunction

  // One step of the 16-bit Fibonacci LFSR, taps 16, 14, 13, 11 (maximal length).
  function automatic logic [15:0] lfsr_next(input logic [15:0] r);
    return {r[14:0], r[15] ^ r[13] ^ r[12] ^ r[10]};
  endfunction

  // Signed saturation of a wide value to `w` bits (w <= 31).
  function automatic logic signed [31:0] sat(input logic signed [31:0] x, input int w);
    logic signed [31:0] hi, lo;
    hi = (32'sd1 <<< (w - 1)) - 32'sd1;
    lo = -(32'sd1 <<< (w - 1));
    if (x > hi) return hi;
    if (x < lo) return lo;
    return x;
  endfunction

endpackage
