// neutnn_place_cells: the place-cell module of a reference frame, built as a
// NeuTNN of three minicolumns.
//
// Minicolumn 0 is type #1 (MC1_NEURON neurons, MC1_SYN synapses per segment)
// and minicolumns 1 and 2 are type #2 (MC2_NEURON neurons, MC2_SYN synapses
// per segment); the two type-#2 minicolumns are built as one two-minicolumn
// layer with disjoint kernels of MC2_SYN inputs. Every neuron has N_DEND active dendrites of N_DIST distal and
// N_PROX proximal segments. With the defaults (40 and 30 neurons, 10
// dendrites, 16 segments, 71 and 81 synapses) the array holds
// 454,400 + 2 x 388,800 = 1,232,000 synapses, the place-cell configuration
// this RTL reproduces. How feature/location information is turned into
// spikes and routed to the segments is left outside: each minicolumn's
// distal and proximal input vectors are ports.
//
// Operation: pulse start (with learn_mode high to train) while busy is low.
// The window controller clears the network, runs T_STEPS time steps (the
// current step is on t; apply input spikes as one-cycle pulses in the step
// they belong to) and, when training, adds one STDP learn cycle. done pulses
// in the last cycle. Each minicolumn reports its winning neuron: out_spike is
// the one-hot winner pulse in its firing step, win_valid/win_id/win_time hold
// the result from the next cycle until the next window starts.
//
// Weights are loaded and read through wt (address: minicolumn, neuron,
// dendrite, segment, synapse); wt_rdata is combinational. Writes should be
// made while busy is low. The minicolumn sizes are the place-cell sizes; the
// window controller, the weight port, the distal/proximal split of the 16
// segments and the thresholds are this design's choices.
module neutnn_place_cells
  import neutnn_pkg::*;
#(
  parameter int unsigned MC1_NEURON = 40,
  parameter int unsigned MC1_SYN    = 71,
  parameter int unsigned MC2_NEURON = 30,
  parameter int unsigned MC2_SYN    = 81,
  parameter int unsigned N_DEND     = 10,
  parameter int unsigned N_DIST     = 8,
  parameter int unsigned N_PROX     = 8,
  parameter resp_e       RESP       = RESP_RNL,
  parameter int unsigned THETA_DIST = 24,
  parameter int unsigned THETA_PROX = 24,
  parameter int unsigned BOOST      = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // window control
  input  logic                  start,
  input  logic                  learn_mode,
  output logic                  busy,
  output logic                  done,
  output tstep_t                t,
  // spike inputs, one-cycle pulses during the window
  input  logic [MC1_SYN-1:0]    mc1_distal_in,
  input  logic [MC1_SYN-1:0]    mc1_prox_in,
  input  logic [MC2_SYN-1:0]    mc2a_distal_in,
  input  logic [MC2_SYN-1:0]    mc2a_prox_in,
  input  logic [MC2_SYN-1:0]    mc2b_distal_in,
  input  logic [MC2_SYN-1:0]    mc2b_prox_in,
  // winners
  output logic [MC1_NEURON-1:0] mc1_out_spike,
  output logic [MC2_NEURON-1:0] mc2a_out_spike,
  output logic [MC2_NEURON-1:0] mc2b_out_spike,
  output logic [2:0]            win_valid,
  output logic [7:0]            win_id   [3],
  output tstep_t                win_time [3],
  // weight port
  input  wt_req_t               wt,
  output weight_t               wt_rdata
);

  logic    clear, run, learn;
  weight_t rd [2];

  neutnn_gamma_ctrl u_ctrl (
    .clk, .rst_n, .start, .learn_mode, .busy, .clear, .run, .t, .learn, .done
  );

  neutnn_minicolumn #(
    .N_NEURON(MC1_NEURON), .NUM_SYN(MC1_SYN), .N_DEND(N_DEND),
    .N_DIST(N_DIST), .N_PROX(N_PROX), .RESP(RESP),
    .THETA_DIST(THETA_DIST), .THETA_PROX(THETA_PROX), .BOOST(BOOST)
  ) u_mc1 (
    .clk, .rst_n, .clear, .run, .t,
    .distal_in(mc1_distal_in), .prox_in(mc1_prox_in),
    .out_spike(mc1_out_spike), .win_valid(win_valid[0]), .win_id(win_id[0]),
    .win_time(win_time[0]), .learn,
    .wr_en(wt.we && wt.addr.mc == 2'd0), .rw_neuron(wt.addr.neuron),
    .rw_dend(wt.addr.dend), .rw_seg(wt.addr.seg), .rw_syn(wt.addr.syn),
    .wr_data(wt.wdata), .rd_data(rd[0])
  );

  // minicolumns 1 and 2 (type #2) form a layer with disjoint kernels
  logic [2*MC2_NEURON-1:0] l2_spike;
  logic [1:0]              l2_valid;
  logic [7:0]              l2_id   [2];
  tstep_t                  l2_time [2];

  neutnn_layer #(
    .N_MC(2), .KERNEL(MC2_SYN), .STRIDE(MC2_SYN), .IN_W(2 * MC2_SYN),
    .N_NEURON(MC2_NEURON), .N_DEND(N_DEND), .N_DIST(N_DIST), .N_PROX(N_PROX),
    .RESP(RESP), .THETA_DIST(THETA_DIST), .THETA_PROX(THETA_PROX),
    .BOOST(BOOST)
  ) u_mc2 (
    .clk, .rst_n, .clear, .run, .t,
    .distal_in({mc2b_distal_in, mc2a_distal_in}),
    .prox_in({mc2b_prox_in, mc2a_prox_in}),
    .out_spike(l2_spike), .win_valid(l2_valid), .win_id(l2_id),
    .win_time(l2_time), .learn,
    .wr_en(wt.we && (wt.addr.mc == 2'd1 || wt.addr.mc == 2'd2)),
    .rw_mc(wt.addr.mc - 2'd1), .rw_neuron(wt.addr.neuron),
    .rw_dend(wt.addr.dend), .rw_seg(wt.addr.seg), .rw_syn(wt.addr.syn),
    .wr_data(wt.wdata), .rd_data(rd[1])
  );

  assign mc2a_out_spike = l2_spike[MC2_NEURON-1:0];
  assign mc2b_out_spike = l2_spike[2*MC2_NEURON-1:MC2_NEURON];
  assign win_valid[2:1] = l2_valid;
  assign win_id[1]      = l2_id[0];
  assign win_id[2]      = l2_id[1];
  assign win_time[1]    = l2_time[0];
  assign win_time[2]    = l2_time[1];

  always_comb begin
    unique case (wt.addr.mc)
      2'd0:    wt_rdata = rd[0];
      2'd1,
      2'd2:    wt_rdata = rd[1];
      default: wt_rdata = '0;
    endcase
  end

  // weights are only written between windows
  a_wr_idle: assert property (@(posedge clk) disable iff (!rst_n)
                              wt.we |-> !busy);

endmodule
