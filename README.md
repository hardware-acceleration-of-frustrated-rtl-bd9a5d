# A parallel Gibbs sampler for convolutional restricted Boltzmann machines

Frustrated spin lattices such as the Shastry–Sutherland Ising model have rugged
energy landscapes. Their low-energy states are usually searched for with Monte
Carlo methods. A restricted Boltzmann machine (RBM) can encode such a lattice
exactly: each spin becomes a visible node, each bond a hidden node. Because the
graph is bipartite, every hidden node can be sampled at once given the visible
layer, and every visible node at once given the hidden layer. When the lattice is
translationally symmetric, the RBM's weights repeat from unit cell to unit cell. The
weight matrix then collapses to a few small convolution filters, one per bond of the
unit cell: this is a *convolutional* RBM (CRBM).

This RTL implements that sampler as one block of logic in which every node has its
own hardware. Each clock cycle, the whole hidden layer is resampled from the visible
layer, and the whole visible layer from the hidden layer. The default build holds:

| quantity | value |
|---|---|
| visible lattice | 18 × 18 = 324 one-bit nodes |
| filters | 10, each 3 × 3, stride 2 |
| hidden nodes | 10 groups × 9 × 9 = 810 one-bit nodes |
| filter weights | signed 10 bit: sign, 5 integer, 4 fraction bits (Q5.4) |
| visible accumulator | signed 12 bit (Q7.4) |
| probabilities, random numbers | unsigned 16-bit fractions of one |
| output | one 324-bit visible sample per core clock |

At the 30 MHz clock of the FPGA build this design follows, that is one sample every
33 ns.

## The sampling step

Visible nodes `V[r][c]` and hidden nodes `H[k][i][j]` are bits. Group `k` belongs to
filter `k`. One Gibbs half-step in each direction is:

```
forward   x[k][i][j] = a[k] + sum_{m,n<3} w[k][m][n] * Vext[2i+m][2j+n]          (10-bit, saturated)
          H[k][i][j] = ( sigmoid(x / 16) * 65536  >  lfsr )

reverse   y[k][r][c] = sum_{m',n'<3} wr[k][m'][n'] * Hpad[k][r+m'][c+n']           (10-bit, saturated)
          z[r][c]    = b(c) + sum_k y[k][r][c]                                      (12-bit, saturated)
          V[r][c]    = ( sigmoid(z / 16) * 65536  >  lfsr )
```

- `Vext` is the visible layer extended by two rows and two columns. This is the
  boundary condition (see below).
- `Hpad` is group `k` spread over the visible grid with zeros in between (see below).
- `wr` is the flipped filter, `wr[m][n] = w[2-m][2-n]` for a symmetric sampler. The host
  loads it separately, so the two directions can also be given different filters.
- `a[k]` is one hidden bias per filter.
- `b(c)` is the visible bias. Optionally, odd columns get their own value.

Since a node is a single bit, each "product" `w * V` is a 2:1 multiplexer that passes
the weight or zero. A convolution output is therefore nine multiplexers and an adder
tree (`conv_mask_acc`). No multipliers are used anywhere.

The sigmoid is a table with one entry for every input code: 1024 entries for the
forward words and 4096 for the accumulator. Each entry is
`min(65535, round(65536 / (1 + exp(-x/16))))`, computed when the design is elaborated
(`sigmoid_lut`). A node becomes 1 when the table value is strictly greater than its
16-bit random number.

Every node has its own 16-bit LFSR lane (taps 16, 14, 13, 11) with its own seed, so
the nodes are sampled independently. The lanes are grouped as in the original
design: one `lfsr_bank` per filter group, plus one for the visible layer.

The hardware has no notion of spins, couplings or temperature. Turning `J1`, `J2`,
`h` and `β` into `w`, `wr`, `a` and `b` is left to the host. That includes folding in
the inverse temperature and converting ±1 spins to the 0/1 nodes used here. The
hardware only sees fixed-point filter values.

## Transposing a strided convolution: the zero padder

This is the least obvious part of the design.

The forward pass is a stride-2 cross-correlation. Hidden node `(i, j)` sees the 3 × 3
window of `Vext` that starts at `(2i, 2j)`. The reverse pass must send each hidden
node's weight back to the same visible nodes, which is the transpose of that
operation. The design does not build a separate scatter network. Instead, it reuses
the forward convolution unit with stride 1 and the flipped filter, running over a
padded map:

```
Hpad[2i + 2][2j + 2] = H[i][j]        all other positions 0
```

Take visible row `r` and filter offset `m'`. The padded row `r + m'` holds a hidden
row only when `r + m' = 2i + 2`, that is when `r = 2i + (2 - m')`. That is exactly
the visible row that hidden row `i` covered in the forward pass with filter row
`m = 2 - m'`. So the flipped weight `wr[m'] = w[2 - m']` meets the right node.

The padded map is (L+2) × (L+2) = 20 × 20. Padded rows 0 and 1 correspond to
forward positions past the end of the lattice:

- **Periodic direction:** padded row `q < 2` holds the hidden row `i` with
  `2i + 2 = q + n`, where `n` is the active size. For even `n` this is the last hidden
  row, copied to padded row 0.
- **Open direction:** padded rows 0 and 1 are zero.

`zero_padder` implements this for any M and S. `tb_zero_padder` checks it for every
size from 3 to 8, in all four open/periodic combinations, against a direct transpose.

## Boundary conditions and lattice size

`lattice_wrapper` builds `Vext` (L+2) × (L+2) from the active `rows × cols` part of
the visible register:

- Index `x < n` takes node `x`.
- The next two indices take nodes `x - n` (periodic) or zero (open).
- Everything beyond is zero.

Rows and columns have separate flags, so a strip can be open across its width and
periodic along its length.

The active size is a run-time register (1 to 18). Nodes outside it are held at zero
in both registers. Only `floor((n+1)/2)` hidden rows and columns are active. For
periodic boundaries the active size should be even, so that the stride-2 pattern
closes on itself.

An optional mode clears the last active hidden row of every group at each update.
This clamps the bonds that would close a lattice in that direction.

## Two chains in one pipeline

The visible and hidden registers are the only state. On each clock, both are
loaded:

- H from the old V
- V from the old H

Hence the registers hold two independent Markov chains that take turns:

| clock | chain A | chain B |
|---|---|---|
| init | V0 (random) | H0 (random) |
| 1 | H1 = f(V0) | V1 = g(H0) |
| 2 | V2 = g(H1) | H2 = f(V1) |
| … | … | … |

Each chain finishes a full visible update every two clocks. The visible register
shows a new sample every clock, alternating between chains A and B. The host reads
every sample. Even-numbered samples (counting from 1) belong to chain A, and
odd-numbered samples to chain B.

`init` loads both registers with random bits: the MSBs of the LFSR lanes. `step`
advances one clock. When neither is asserted, the registers and the LFSRs hold, so a
stall does not disturb either chain.

## Host interface and a run

The top (`crbm_top`) has two clock domains:

- `bus_clk` carries the host streams.
- `clk` carries the sampler.

Two Gray-code dual-clock FIFOs (`async_fifo`, 16 deep) cross between them. The
host-side ports are shaped like the FIFO ends of a PCIe-to-FIFO bridge:

- **Command stream** (`host_wr_en`, `host_wr_data[31:0]`, `host_wr_full`). Each word is
  `{address[15:0], data[15:0]}`:

  | address | register |
  |---|---|
  | `0x0000 + 9k + 3m + n` | forward filter `w[k][m][n]`, Q5.4 in `data[9:0]` |
  | `0x0100 + 9k + 3m + n` | flipped filter `wr[k][m][n]`, Q5.4 |
  | `0x0200 + k` | hidden bias `a[k]`, Q5.4 |
  | `0x0300`, `0x0301` | visible bias for even and odd columns, Q7.4 in `data[11:0]` |
  | `0x0400`, `0x0401` | active rows, active columns |
  | `0x0402` | mode: bit 0 periodic rows, bit 1 periodic columns, bit 2 clear last hidden row, bit 3 separate odd-column bias |
  | `0x0404`, `0x0405` | number of sampling cycles, low and high 16 bits |
  | `0x0406` | start |

  After reset the lattice is 18 × 18 and periodic in both directions. All weights and
  biases are zero.

- **Sample stream** (`host_rd_en`, `host_rd_data[L*L-1:0]`, `host_rd_empty`). This is a
  show-ahead stream: one word per sample, and bit `r*L + c` is node `(r, c)`.

A run proceeds as follows:

1. The start word reaches `cfg_regs`.
2. `crbm_ctrl` raises `init` for one clock.
3. `crbm_ctrl` raises `step` once per clock until the programmed number of samples has
   been pushed.
4. `busy` and `done` (core clock) report progress.

If the host reads more slowly than 324 bits per core clock, the sample FIFO fills.
The controller then stalls the sampler, so no sample is lost and the chains are not
disturbed.

## Files

| file | block |
|---|---|
| `rtl/crbm_pkg.sv` | sizes, word widths, `lattice_cfg_t`, address map, LFSR step and seed, saturation |
| `rtl/crbm_top.sv` | top: FIFOs, decoder, controller, core |
| `rtl/crbm_core.sv` | the two-stage sampler |
| `rtl/lattice_wrapper.sv` | periodic or open extension of the visible layer |
| `rtl/conv_mask_acc.sv` | strided mask-and-accumulate convolution, used in both directions |
| `rtl/sigmoid_lut.sv` | sigmoid tables |
| `rtl/lfsr_bank.sv` | per-node LFSRs |
| `rtl/stoch_compare.sv` | probability > random |
| `rtl/hidden_node_reg.sv`, `rtl/visible_node_reg.sv` | node registers with masking, random start, and row clearing |
| `rtl/zero_padder.sv` | hidden-group spreading for the reverse pass |
| `rtl/accumulator.sv` | sum over filters plus visible bias |
| `rtl/crbm_ctrl.sv` | run controller |
| `rtl/cfg_regs.sv` | command decoder and problem registers |
| `rtl/async_fifo.sv` | dual-clock FIFO |
| `tb/crbm_ref_pkg.sv` | integer and floating-point reference model of the sampling step |
| `tb/tb_<module>.sv` | self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. The
block-level ones run in well under a second. `tb_crbm_top` runs the full 18 × 18 ×
10-filter design through the host streams. It makes four runs: periodic with a slow
reader that forces stalls, a laterally open 18 × 12 strip with odd/even bias, the
cleared last hidden row, and a 6 × 6 sub-lattice. It checks every sample and every
hidden update against the reference model and takes about a second.

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/crbm_pkg.sv tb/crbm_ref_pkg.sv tb/tb_crbm_top.sv --top-module tb_crbm_top -o sim
./obj_dir/sim
```

Replace `tb_crbm_top` with any other `tb_<module>` to run that test. The reference
model computes the fields directly from the equations above: no wrapper, no padder,
and a floating-point sigmoid. The core and top testbenches read the LFSR values the
hardware is about to use, then demand bit-exact agreement.

To change the size, override the parameters of `crbm_top` (`L`, `NF`; `M = 3` and
`S = 2` are the only values the testbenches exercise). The sigmoid tables and all
widths follow from `crbm_pkg`.

## How closely this follows the original design, and where it departs

The following come from the published accelerator:

- the block structure (wrapper, convolutions, sigmoid tables, LFSR comparators, node
  registers, zero padders, accumulator)
- the two-stage pipeline with two chains
- the sizes (18 × 18, 10 filters of 3 × 3, stride 2, 810 hidden nodes)
- the 10-bit, 12-bit and 16-bit precisions
- separate flipped filters
- the odd/even visible bias
- the clear-last-hidden-row flag
- the list of host-programmable parameters

The following are choices made here, because the description leaves them open:

- Saturation at each fixed-point stage.
- One hidden bias per filter.
- One LFSR lane per node. The description only counts one LFSR "module" per filter
  group. It does not say whether a group's nodes share a random number.
- The LFSR polynomial and seeds.
- The sigmoid table's rounding.
- The exact padding offsets. They are derived above. The original block diagram
  illustrates padding with a smaller example whose offsets differ.
- The command word format and address map, and the start command.
- The controller, the stall on a full sample FIFO, and the FIFO structure and depth.
- Where the visible bias is added. The original block diagram draws it at the
  reverse convolution, while the text adds it in the accumulator. This design follows
  the text.

The following are not included:

- the PCIe block and the PCIe-to-FIFO bridge IP (the top's `host_*` ports are their
  FIFO side)
- clock generation
- the host software that maps a Hamiltonian to filters and evaluates energies

The testbenches check the hardware against its own equations, bit for bit. They do
not show that a given filter set reproduces the physics of the original study. That
depends on the host-side mapping, which is not part of this RTL.
