// crbm_ctrl -- run controller of the sampler.
//
// A run is started by `start` (one clock, from the host command decoder) and lasts
// for `ncycles` sampling cycles. The controller first raises `init` for one clock,
// which loads random start values into the visible and hidden registers, then
// raises `step` once per clock until ncycles steps have been taken. Every step
// produces one visible sample that is written into the sample FIFO, so a step is
// only taken while the FIFO is not full: when it is full the controller stalls the
// whole sampler (both registers and the LFSRs hold), which keeps both chains intact.
// `busy` is high from the start to the last step, `done` rises after the last step
// and stays high until the next start. A start while busy is ignored; ncycles = 0
// ends the run right after the initialisation.
//
// The host programming the number of sampling cycles follows the published design;
// the state machine, the initialisation clock and the stall on a full FIFO are this
// design's choices.
module crbm_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] ncycles,
  input  logic        out_full,
  output logic        init,
  output logic        step,
  output logic        stall,
  output logic        busy,
  output logic        done
);

  typedef enum logic [1:0] { S_IDLE, S_INIT, S_RUN } state_t;

  state_t      state;
  logic [31:0] count;

  assign init  = (state == S_INIT);
  assign step  = (state == S_RUN) && !out_full;
  assign stall = (state == S_RUN) &&  out_full;
  assign busy  = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      count <= '0;
      done  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_INIT;
          count <= '0;
          done  <= 1'b0;
        end
        S_INIT: begin
          if (ncycles == 0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_RUN;
          end
        end
        S_RUN: if (step) begin
          count <= count + 32'd1;
          if (count == ncycles - 32'd1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Never step into a full sample FIFO.
  always_ff @(posedge clk) begin
    if (rst_n) a_no_step_when_full: assert (!(step && out_full)) else $error("crbm_ctrl: step while full");
  end

endmodule
