// cfg_regs -- host command decoder and problem-parameter registers.
//
// Consumes the host's 32-bit command words, one per clock, from the show-ahead read
// side of the command FIFO (`cmd_valid` = FIFO not empty, `cmd_pop` = read enable).
// Each word is {address[15:0], data[15:0]} (map in crbm_pkg) and writes one
// register: a forward filter weight, a flipped-filter weight, a hidden bias, one of
// the two visible biases, the active lattice rows or columns, the mode bits
// (periodicity per direction, clear-last-hidden-row, separate odd-column bias), the
// low or high half of the number of sampling cycles, or the start command, which
// gives a one-clock `start` pulse. Unknown addresses are ignored. Registers take
// effect on the clock after the word is popped; the host must not rewrite them
// during a run.
//
// Reset values: all weights and biases zero, an L x L lattice, periodic in both
// directions, no clearing, common visible bias, zero cycles.
//
// What the host writes follows the published design; the word format, the address
// map and the reset values are this design's choices.
module cfg_regs
  import crbm_pkg::*;
#(
  parameter int L  = L_DEF,
  parameter int M  = M_DEF,
  parameter int NF = NF_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  input  logic [HOST_W-1:0]        cmd,
  output logic                     cmd_pop,
  output logic signed [CONV_W-1:0] w      [NF][M][M],
  output logic signed [CONV_W-1:0] wr     [NF][M][M],
  output logic signed [CONV_W-1:0] hbias  [NF],
  output logic signed [ACC_W-1:0]  vbias_even,
  output logic signed [ACC_W-1:0]  vbias_odd,
  output lattice_cfg_t             cfg,
  output logic [31:0]              ncycles,
  output logic                     start
);

  logic [15:0] addr, data;
  assign addr    = cmd[31:16];
  assign data    = cmd[15:0];
  assign cmd_pop = cmd_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NF; k++) begin
        hbias[k] <= '0;
        for (int m = 0; m < M; m++)
          for (int n = 0; n < M; n++) begin
            w[k][m][n]  <= '0;
            wr[k][m][n] <= '0;
          end
      end
      vbias_even <= '0;
      vbias_odd  <= '0;
      cfg        <= '{rows: 8'(L), cols: 8'(L), per_row: 1'b1, per_col: 1'b1,
                      clr_last_hrow: 1'b0, oddeven_bias: 1'b0};
      ncycles    <= '0;
      start      <= 1'b0;
    end else begin
      start <= 1'b0;
      if (cmd_valid) begin
        for (int k = 0; k < NF; k++) begin
          if (addr == A_HBIAS + 16'(k)) hbias[k] <= CONV_W'(data);
          for (int m = 0; m < M; m++)
            for (int n = 0; n < M; n++) begin
              if (addr == A_W  + 16'(k*M*M + m*M + n)) w[k][m][n]  <= CONV_W'(data);
              if (addr == A_WR + 16'(k*M*M + m*M + n)) wr[k][m][n] <= CONV_W'(data);
            end
        end
        unique case (addr)
          A_VB_EV:  vbias_even        <= ACC_W'(data);
          A_VB_OD:  vbias_odd         <= ACC_W'(data);
          A_ROWS:   cfg.rows          <= data[7:0];
          A_COLS:   cfg.cols          <= data[7:0];
          A_MODE: begin
            cfg.per_row       <= data[0];
            cfg.per_col       <= data[1];
            cfg.clr_last_hrow <= data[2];
            cfg.oddeven_bias  <= data[3];
          end
          A_NCYC_L: ncycles[15:0]     <= data;
          A_NCYC_H: ncycles[31:16]    <= data;
          A_START:  start             <= 1'b1;
          default: ;
        endcase
      end
    end
  end

  initial begin
    assert (NF * M * M <= 256) else $error("cfg_regs: filter block exceeds its address window");
  end

endmodule
