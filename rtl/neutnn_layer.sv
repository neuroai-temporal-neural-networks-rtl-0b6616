// neutnn_layer: a NeuTNN layer of N_MC identical minicolumns side by side.
//
// A kernel of KERNEL inputs with stride STRIDE selects each minicolumn's
// inputs from the layer input vector: minicolumn m sees inputs
// [m*STRIDE, m*STRIDE + KERNEL). The same window is used for the distal and
// the proximal input vectors. STRIDE = KERNEL gives disjoint windows,
// STRIDE = 0 gives every minicolumn the whole input. The minicolumns run in
// parallel and each keeps its own winner; out_spike is the concatenation of
// their one-hot winner pulses, minicolumn 0 in the low bits, which is the
// layer's output vector for a following layer (N_MC * N_NEURON wide).
// Elaboration stops with an error when the kernel does not fit the input
// width.
//
// Interface and timing: as neutnn_minicolumn, with the per-minicolumn results
// in arrays and rw_mc selecting the minicolumn on the weight port. Stacking
// minicolumns into a layer and a kernel of configurable size and stride come
// from the NeuTNN description; the window placement is this design's.
module neutnn_layer
  import neutnn_pkg::*;
#(
  parameter int unsigned N_MC       = 2,
  parameter int unsigned KERNEL     = 81,
  parameter int unsigned STRIDE     = 81,
  parameter int unsigned IN_W       = 162,
  parameter int unsigned N_NEURON   = 30,
  parameter int unsigned N_DEND     = 10,
  parameter int unsigned N_DIST     = 8,
  parameter int unsigned N_PROX     = 8,
  parameter resp_e       RESP       = RESP_RNL,
  parameter int unsigned THETA_DIST = 24,
  parameter int unsigned THETA_PROX = 24,
  parameter int unsigned BOOST      = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       run,
  input  tstep_t                     t,
  input  logic [IN_W-1:0]            distal_in,
  input  logic [IN_W-1:0]            prox_in,
  output logic [N_MC*N_NEURON-1:0]   out_spike,
  output logic [N_MC-1:0]            win_valid,
  output logic [7:0]                 win_id   [N_MC],
  output tstep_t                     win_time [N_MC],
  input  logic                       learn,
  input  logic                       wr_en,
  input  logic [1:0]                 rw_mc,
  input  logic [7:0]                 rw_neuron,
  input  logic [7:0]                 rw_dend,
  input  logic [7:0]                 rw_seg,
  input  logic [9:0]                 rw_syn,
  input  weight_t                    wr_data,
  output weight_t                    rd_data
);

  if ((N_MC - 1) * STRIDE + KERNEL > IN_W) begin : g_bad_kernel
    $error("neutnn_layer: kernel %0d, stride %0d and %0d minicolumns need more than %0d inputs",
           KERNEL, STRIDE, N_MC, IN_W);
  end

  weight_t mc_rd [N_MC];

  for (genvar m = 0; m < N_MC; m++) begin : g_mc
    neutnn_minicolumn #(
      .N_NEURON(N_NEURON), .NUM_SYN(KERNEL), .N_DEND(N_DEND),
      .N_DIST(N_DIST), .N_PROX(N_PROX), .RESP(RESP),
      .THETA_DIST(THETA_DIST), .THETA_PROX(THETA_PROX), .BOOST(BOOST)
    ) u_mc (
      .clk, .rst_n, .clear, .run, .t,
      .distal_in(distal_in[m*STRIDE +: KERNEL]),
      .prox_in(prox_in[m*STRIDE +: KERNEL]),
      .out_spike(out_spike[m*N_NEURON +: N_NEURON]),
      .win_valid(win_valid[m]), .win_id(win_id[m]), .win_time(win_time[m]),
      .learn, .wr_en(wr_en && rw_mc == 2'(m)), .rw_neuron, .rw_dend, .rw_seg,
      .rw_syn, .wr_data, .rd_data(mc_rd[m])
    );
  end

  always_comb begin
    rd_data = '0;
    for (int m = 0; m < N_MC; m++)
      if (rw_mc == 2'(m)) rd_data = mc_rd[m];
  end

endmodule
