// neutnn_neuron: a NeuTNN neuron built from N_DEND active dendrites.
//
// Every dendrite sees the neuron's distal and proximal input vectors. The
// dendrites compete in a winner-take-all stage: only those that fire in the
// earliest step of the window survive. A Max stage then forwards the largest
// contribution among the survivors (lowest index on a tie) as the neuron's
// value, and the neuron spikes in that step. On a learn strobe with learn_en
// high, only the winning dendrite learns.
//
// Interface and timing: spike/value/win_dend are combinational in the firing
// step and held (registered) until clear. Weight port: rw_dend selects the
// dendrite, the rest goes to it. The WTA-then-Max order is read from the
// neuron diagram of the NeuTNN description; how ties are broken is this
// design's choice.
module neutnn_neuron
  import neutnn_pkg::*;
#(
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
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               run,
  input  tstep_t             t,
  input  logic [NUM_SYN-1:0] distal_in,
  input  logic [NUM_SYN-1:0] prox_in,
  output logic               spike,
  output logic [PW-1:0]      value,
  output logic [7:0]         win_dend,
  output logic               fired,
  input  logic               learn,
  input  logic               learn_en,
  input  logic               wr_en,
  input  logic [7:0]         rw_dend,
  input  logic [7:0]         rw_seg,
  input  logic [9:0]         rw_syn,
  input  weight_t            wr_data,
  output weight_t            rd_data
);

  logic [N_DEND-1:0] d_spike;
  logic [PW-1:0]     d_value [N_DEND];
  weight_t           d_rd    [N_DEND];

  logic              fired_q;
  logic [7:0]        win_q;
  logic [PW-1:0]     value_q;

  for (genvar d = 0; d < N_DEND; d++) begin : g_dend
    neutnn_dendrite #(
      .NUM_SYN(NUM_SYN), .N_DIST(N_DIST), .N_PROX(N_PROX), .RESP(RESP),
      .THETA_DIST(THETA_DIST), .THETA_PROX(THETA_PROX), .BOOST(BOOST)
    ) u_dend (
      .clk, .rst_n, .clear, .run, .t, .distal_in, .prox_in,
      .spike(d_spike[d]), .value(d_value[d]), .win_seg(), .fired(),
      .depolarized(),
      .learn, .learn_en(learn_en && fired_q && win_q == 8'(d)),
      .wr_en(wr_en && rw_dend == 8'(d)), .rw_seg, .rw_syn, .wr_data,
      .rd_data(d_rd[d])
    );
  end

  // WTA: dendrites spiking in this step (none can spike later once one has,
  // since the neuron is then fired); Max: largest contribution among them
  logic          any;
  logic [7:0]    idx;
  logic [PW-1:0] best;
  always_comb begin
    any  = 1'b0;
    idx  = '0;
    best = '0;
    for (int d = 0; d < N_DEND; d++)
      if (d_spike[d] && (!any || d_value[d] > best)) begin
        any  = 1'b1;
        idx  = 8'(d);
        best = d_value[d];
      end
  end

  assign spike = any && !fired_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fired_q <= 1'b0;
      win_q   <= '0;
      value_q <= '0;
    end else if (clear) begin
      fired_q <= 1'b0;
      win_q   <= '0;
      value_q <= '0;
    end else if (spike) begin
      fired_q <= 1'b1;
      win_q   <= idx;
      value_q <= best;
    end
  end

  assign value    = spike ? best : value_q;
  assign win_dend = spike ? idx  : win_q;
  assign fired    = fired_q;

  always_comb begin
    rd_data = '0;
    for (int d = 0; d < N_DEND; d++)
      if (rw_dend == 8'(d)) rd_data = d_rd[d];
  end

endmodule
