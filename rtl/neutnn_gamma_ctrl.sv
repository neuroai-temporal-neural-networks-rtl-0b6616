// neutnn_gamma_ctrl: sequencer of one computation window (gamma cycle).
//
// A start pulse (while idle) begins a window: one cycle of clear, which
// forgets all spikes of the previous window, then T_STEPS cycles with run
// high and t counting 0..T_STEPS-1, in which input spikes are applied and
// the network evaluates, then, if learn_mode was high at start, one cycle
// with learn high in which STDP updates the weights. done pulses in the last
// cycle of the window. A window therefore takes T_STEPS + 2 cycles with
// learning and T_STEPS + 1 without; start is ignored while busy. This
// sequencing is this design's own; the NeuTNN description gives only the
// temporal coding and the 100 kHz clock.
module neutnn_gamma_ctrl
  import neutnn_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   learn_mode,
  output logic   busy,
  output logic   clear,
  output logic   run,
  output tstep_t t,
  output logic   learn,
  output logic   done
);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_RUN, S_LEARN} state_e;

  state_e state_q;
  tstep_t t_q;
  logic   lm_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      t_q     <= '0;
      lm_q    <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE:  if (start) begin
                   state_q <= S_CLEAR;
                   lm_q    <= learn_mode;
                 end
        S_CLEAR: begin
                   state_q <= S_RUN;
                   t_q     <= '0;
                 end
        S_RUN:   if (t_q == tstep_t'(T_STEPS - 1))
                   state_q <= lm_q ? S_LEARN : S_IDLE;
                 else
                   t_q <= t_q + 1'b1;
        S_LEARN: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy  = state_q != S_IDLE;
  assign clear = state_q == S_CLEAR;
  assign run   = state_q == S_RUN;
  assign t     = t_q;
  assign learn = state_q == S_LEARN;
  assign done  = (state_q == S_LEARN) ||
                 (state_q == S_RUN && t_q == tstep_t'(T_STEPS - 1) && !lm_q);

endmodule
