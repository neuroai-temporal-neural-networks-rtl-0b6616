// neutnn_synapse_array: the synapses of one segment.
//
// Each synapse holds a weight, remembers whether and when its input spiked in
// the current computation window, and outputs its response every time step:
// ramp-no-leak (min(t - t_in + 1, w)) or step-no-leak (w) from the arrival
// step on, zero before. The responses of all synapses are summed by the
// segment that owns the array.
//
// Learning: on a learn strobe with learn_en high, every weight moves by one
// step according to a spike-timing-dependent rule that compares the input
// spike with the segment's output spike (post_fired, post_t):
//   input spike at or before the output spike -> +1 (capture)
//   input spike after the output spike        -> -1 (backoff)
//   output spike but no input spike           -> -1 (backoff)
//   input spike but no output spike           -> +1 (search)
//   neither                                   -> no change
// Weights saturate at 0 and WMAX. RNL/SNL responses and STDP come from the
// NeuTNN description; the exact rule, its deterministic unit steps and the
// write/read port are this design's choices.
//
// Interface and timing: clear (one cycle, start of a window) forgets all
// input spikes. In a cycle with run high and time step t, an in_spike pulse
// counts from that same step: resp is combinational from in_spike. The first
// pulse of a window is the one remembered. wr_en writes wr_data into synapse
// rw_syn at the clock edge and has priority over learning; rd_data is the
// weight of synapse rw_syn, combinational. Reset clears weights to zero.
module neutnn_synapse_array
  import neutnn_pkg::*;
#(
  parameter int unsigned NUM_SYN = 71,
  parameter resp_e       RESP    = RESP_RNL,
  localparam int unsigned IW     = (NUM_SYN > 1) ? $clog2(NUM_SYN) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       run,
  input  tstep_t                     t,
  input  logic [NUM_SYN-1:0]         in_spike,
  output weight_t                    resp [NUM_SYN],
  // learning
  input  logic                       learn,
  input  logic                       learn_en,
  input  logic                       post_fired,
  input  tstep_t                     post_t,
  // weight access
  input  logic                       wr_en,
  input  logic [9:0]                 rw_syn,
  input  weight_t                    wr_data,
  output weight_t                    rd_data
);

  weight_t            w_q    [NUM_SYN];
  tstep_t             tin_q  [NUM_SYN];
  logic [NUM_SYN-1:0] seen_q;
  logic [IW-1:0]      idx;

  assign idx = rw_syn[IW-1:0];

  // response of every synapse in the current step
  always_comb begin
    for (int i = 0; i < NUM_SYN; i++) begin
      if (!run)
        resp[i] = '0;
      else if (seen_q[i])
        resp[i] = response(RESP, w_q[i], t, tin_q[i]);
      else if (in_spike[i])
        resp[i] = response(RESP, w_q[i], t, t);
      else
        resp[i] = '0;
    end
  end

  // input spike capture
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen_q <= '0;
      for (int i = 0; i < NUM_SYN; i++) tin_q[i] <= '0;
    end else if (clear) begin
      seen_q <= '0;
    end else if (run) begin
      for (int i = 0; i < NUM_SYN; i++)
        if (in_spike[i] && !seen_q[i]) begin
          seen_q[i] <= 1'b1;
          tin_q[i]  <= t;
        end
    end
  end

  // weights: load port and STDP
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_SYN; i++) w_q[i] <= '0;
    end else if (wr_en) begin
      if (rw_syn < 10'(NUM_SYN)) w_q[idx] <= wr_data;
    end else if (learn && learn_en) begin
      for (int i = 0; i < NUM_SYN; i++) begin
        if (seen_q[i] && (!post_fired || tin_q[i] <= post_t)) begin
          if (w_q[i] != weight_t'(WMAX)) w_q[i] <= w_q[i] + 1'b1;
        end else if (post_fired) begin
          if (w_q[i] != '0) w_q[i] <= w_q[i] - 1'b1;
        end
      end
    end
  end

  assign rd_data = (rw_syn < 10'(NUM_SYN)) ? w_q[idx] : '0;

endmodule
