// neutnn_pkg: types and constants shared by the NeuTNN building blocks.
//
// Time is discrete. One computation window ("gamma cycle") has T_STEPS time
// steps, one clock cycle each; a spike is a one-cycle pulse on an input line
// and its time is the step in which the pulse occurs. Weights are unsigned
// integers 0..WMAX. The window length and the weight width are this design's
// choice: the NeuTNN hierarchy itself (synapse, segment, active dendrite,
// neuron, minicolumn) fixes neither.
package neutnn_pkg;

  localparam int unsigned T_STEPS = 8;                 // time steps per window
  localparam int unsigned TW      = $clog2(T_STEPS);   // time-step index width
  localparam int unsigned WMAX    = 7;                 // largest weight
  localparam int unsigned WW      = $clog2(WMAX + 1);  // weight width

  typedef logic [TW-1:0] tstep_t;
  typedef logic [WW-1:0] weight_t;

  // Synaptic response function.
  //   RESP_RNL: ramp-no-leak, response grows by one per step from the input
  //             spike on and saturates at the weight.
  //   RESP_SNL: step-no-leak, response equals the weight from the spike on.
  typedef enum logic {RESP_RNL = 1'b0, RESP_SNL = 1'b1} resp_e;

  // Address of one synapse in the place-cell array: minicolumn, neuron,
  // dendrite, segment (distal segments first, then proximal) and synapse.
  typedef struct packed {
    logic [1:0] mc;
    logic [7:0] neuron;
    logic [7:0] dend;
    logic [7:0] seg;
    logic [9:0] syn;
  } wt_addr_t;

  // Weight port: write when we is high; read data is combinational.
  typedef struct packed {
    logic     we;
    wt_addr_t addr;
    weight_t  wdata;
  } wt_req_t;

  // Ramp-no-leak / step-no-leak response of one synapse whose input spike
  // arrived at step t_in, seen at step t (t >= t_in).
  function automatic weight_t response(resp_e kind, weight_t w,
                                       tstep_t t, tstep_t t_in);
    logic [TW:0] ramp;
    ramp = {1'b0, t} - {1'b0, t_in} + 1'b1;
    if (kind == RESP_SNL) return w;
    return (ramp >= (TW+1)'(w)) ? w : WW'(ramp);
  endfunction

endpackage
