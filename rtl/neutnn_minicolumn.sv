// neutnn_minicolumn: N_NEURON NeuTNN neurons sharing one set of distal and
// proximal inputs, with winner-take-all inhibition voting across them.
//
// The first step in which any neuron spikes decides the window: among the
// neurons spiking in that step the one with the largest value wins (lowest
// index on a tie), only its output line spikes, and all other neurons are
// inhibited for the rest of the window. With no spike by the end of the
// window there is no winner. On a learn strobe only the winning neuron's
// winning dendrite and segments update their weights; a window without a
// winner changes no weight.
//
// Interface and timing: out_spike is a combinational one-hot pulse in the
// winning step; win_valid, win_id and win_time are registered from the next
// cycle and held until clear. Weight port: rw_neuron selects the neuron.
// Fan-out of the inputs to all neurons and WTA voting follow the minicolumn
// diagram of the NeuTNN description; the voting order is this design's.
module neutnn_minicolumn
  import neutnn_pkg::*;
#(
  parameter int unsigned N_NEURON   = 40,
  parameter int unsigned NUM_SYN    = 71,
  parameter int unsigned N_DEND     = 10,
  parameter int unsigned N_DIST     = 8,
  parameter int unsigned N_PROX     = 8,
  parameter resp_e       RESP       = RESP_RNL,
  parameter int unsigned THETA_DIST = 24,
  parameter int unsigned THETA_PROX = 24,
  parameter int unsigned BOOST      = 8,
  localparam int unsigned PW        = $clog2(NUM_SYN * WMAX + 64)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                run,
  input  tstep_t              t,
  input  logic [NUM_SYN-1:0]  distal_in,
  input  logic [NUM_SYN-1:0]  prox_in,
  output logic [N_NEURON-1:0] out_spike,
  output logic                win_valid,
  output logic [7:0]          win_id,
  output tstep_t              win_time,
  input  logic                learn,
  input  logic                wr_en,
  input  logic [7:0]          rw_neuron,
  input  logic [7:0]          rw_dend,
  input  logic [7:0]          rw_seg,
  input  logic [9:0]          rw_syn,
  input  weight_t             wr_data,
  output weight_t             rd_data
);

  logic [N_NEURON-1:0] n_spike;
  logic [PW-1:0]       n_value [N_NEURON];
  weight_t             n_rd    [N_NEURON];

  logic                valid_q;
  logic [7:0]          id_q;
  tstep_t              time_q;

  for (genvar n = 0; n < N_NEURON; n++) begin : g_neuron
    neutnn_neuron #(
      .NUM_SYN(NUM_SYN), .N_DEND(N_DEND), .N_DIST(N_DIST), .N_PROX(N_PROX),
      .RESP(RESP), .THETA_DIST(THETA_DIST), .THETA_PROX(THETA_PROX),
      .BOOST(BOOST)
    ) u_neuron (
      .clk, .rst_n, .clear, .run, .t, .distal_in, .prox_in,
      .spike(n_spike[n]), .value(n_value[n]), .win_dend(), .fired(),
      .learn, .learn_en(valid_q && id_q == 8'(n)),
      .wr_en(wr_en && rw_neuron == 8'(n)), .rw_dend, .rw_seg, .rw_syn,
      .wr_data, .rd_data(n_rd[n])
    );
  end

  logic          any;
  logic [7:0]    idx;
  logic [PW-1:0] best;
  always_comb begin
    any  = 1'b0;
    idx  = '0;
    best = '0;
    for (int n = 0; n < N_NEURON; n++)
      if (n_spike[n] && (!any || n_value[n] > best)) begin
        any  = 1'b1;
        idx  = 8'(n);
        best = n_value[n];
      end
  end

  logic win_now;
  assign win_now = any && !valid_q;

  always_comb begin
    for (int n = 0; n < N_NEURON; n++)
      out_spike[n] = win_now && idx == 8'(n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      id_q    <= '0;
      time_q  <= '0;
    end else if (clear) begin
      valid_q <= 1'b0;
      id_q    <= '0;
      time_q  <= '0;
    end else if (win_now) begin
      valid_q <= 1'b1;
      id_q    <= idx;
      time_q  <= t;
    end
  end

  assign win_valid = valid_q;
  assign win_id    = id_q;
  assign win_time  = time_q;

  always_comb begin
    rd_data = '0;
    for (int n = 0; n < N_NEURON; n++)
      if (rw_neuron == 8'(n)) rd_data = n_rd[n];
  end

  // at most one output line spikes per window
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                             $onehot0(out_spike));
  a_once:   assert property (@(posedge clk) disable iff (!rst_n)
                             valid_q |-> out_spike == '0);

endmodule
