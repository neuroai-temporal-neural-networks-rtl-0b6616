// neutnn_segment: one dendritic segment, the NeuTNN equivalent of a TNN point
// neuron.
//
// The segment sums the responses of its synapse array, adds a bias, and fires
// in the first time step of a window in which the sum reaches THETA. It fires
// at most once per window. pot is the potential of the current step; at the
// firing step it is the segment's activation, which the dendrite compares
// across segments. The bias is how a distal segment makes a proximal segment
// of the same dendrite fire earlier (the dendrite drives it); distal segments
// get zero.
//
// Interface and timing: spike is a combinational pulse in the firing step,
// fired/fire_t are registered (valid from the next cycle until clear).
// learn/learn_en are passed to the synapse array, together with the segment's
// own output spike, for the STDP update. The weight port is that of the
// synapse array. Summation of responses and thresholding follow the point
// neuron of the NeuTNN description; THETA's value is this design's choice.
module neutnn_segment
  import neutnn_pkg::*;
#(
  parameter int unsigned NUM_SYN = 71,
  parameter resp_e       RESP    = RESP_RNL,
  parameter int unsigned THETA   = 24,
  localparam int unsigned PW     = $clog2(NUM_SYN * WMAX + 64)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               run,
  input  tstep_t             t,
  input  logic [NUM_SYN-1:0] in_spike,
  input  logic [PW-1:0]      bias,
  output logic               spike,
  output logic               fired,
  output tstep_t             fire_t,
  output logic [PW-1:0]      pot,
  input  logic               learn,
  input  logic               learn_en,
  input  logic               wr_en,
  input  logic [9:0]         rw_syn,
  input  weight_t            wr_data,
  output weight_t            rd_data
);

  weight_t resp [NUM_SYN];
  logic    fired_q;
  tstep_t  fire_t_q;

  neutnn_synapse_array #(.NUM_SYN(NUM_SYN), .RESP(RESP)) u_syn (
    .clk, .rst_n, .clear, .run, .t, .in_spike, .resp,
    .learn, .learn_en, .post_fired(fired_q), .post_t(fire_t_q),
    .wr_en, .rw_syn, .wr_data, .rd_data
  );

  always_comb begin
    pot = bias;
    for (int i = 0; i < NUM_SYN; i++) pot = pot + PW'(resp[i]);
  end

  assign spike = run && !fired_q && (pot >= PW'(THETA));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fired_q  <= 1'b0;
      fire_t_q <= '0;
    end else if (clear) begin
      fired_q  <= 1'b0;
      fire_t_q <= '0;
    end else if (spike) begin
      fired_q  <= 1'b1;
      fire_t_q <= t;
    end
  end

  assign fired  = fired_q;
  assign fire_t = fire_t_q;

endmodule
