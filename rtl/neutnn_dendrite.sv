// neutnn_dendrite: an active dendrite with N_DIST distal and N_PROX proximal
// segments.
//
// All distal segments see the dendrite's distal input vector, all proximal
// segments its proximal input vector; each segment has its own weights and so
// learns its own pattern. Once any distal segment has fired in the window
// the dendrite is depolarised: from the next step on every proximal segment
// gets BOOST added to its potential, so a pattern predicted by the distal
// context makes the proximal segments cross threshold earlier. The dendrite
// itself fires only through a proximal segment.
//
// A winner-take-all (WTA) keeps the proximal segments that fire in the
// earliest step; among them the one with the largest potential wins (lowest
// index on a tie), and its potential is the dendrite's contribution (value).
// The distal segments have a WTA of their own by the same rule, used only to
// pick which distal segment learns. On a learn strobe with learn_en high, the
// winning proximal and the winning distal segment update their weights.
//
// Interface and timing: spike/value/win_seg are combinational in the firing
// step; fired, value_q and win_q are registered until clear. Segment index
// in the weight port: 0..N_DIST-1 distal, then N_DIST.. proximal. The
// distal/proximal split, the depolarising boost and the WTA order are this
// design's reading of the NeuTNN dendrite, whose text says only that proximal
// input is needed to fire, distal input lets it fire earlier, and the
// dendrite forwards the contribution of its most activated segment.
module neutnn_dendrite
  import neutnn_pkg::*;
#(
  parameter int unsigned NUM_SYN    = 71,
  parameter int unsigned N_DIST     = 8,
  parameter int unsigned N_PROX     = 8,
  parameter resp_e       RESP       = RESP_RNL,
  parameter int unsigned THETA_DIST = 24,
  parameter int unsigned THETA_PROX = 24,
  parameter int unsigned BOOST      = 8,
  localparam int unsigned PW        = $clog2(NUM_SYN * WMAX + 64),
  localparam int unsigned NSEG      = N_DIST + N_PROX
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
  output logic [7:0]         win_seg,
  output logic               fired,
  output logic               depolarized,
  input  logic               learn,
  input  logic               learn_en,
  input  logic               wr_en,
  input  logic [7:0]         rw_seg,
  input  logic [9:0]         rw_syn,
  input  weight_t            wr_data,
  output weight_t            rd_data
);

  logic [NSEG-1:0] seg_spike;
  logic [PW-1:0]   seg_pot [NSEG];
  weight_t         seg_rd  [NSEG];
  logic [NSEG-1:0] seg_learn_en;

  logic            depol_q, fired_q, dfired_q;
  logic [7:0]      pwin_q, dwin_q;
  logic [PW-1:0]   value_q;

  for (genvar s = 0; s < NSEG; s++) begin : g_seg
    localparam bit PROX = (s >= N_DIST);
    neutnn_segment #(
      .NUM_SYN(NUM_SYN), .RESP(RESP),
      .THETA(PROX ? THETA_PROX : THETA_DIST)
    ) u_seg (
      .clk, .rst_n, .clear, .run, .t,
      .in_spike(PROX ? prox_in : distal_in),
      .bias((PROX && depol_q) ? PW'(BOOST) : '0),
      .spike(seg_spike[s]), .fired(), .fire_t(),
      .pot(seg_pot[s]),
      .learn, .learn_en(seg_learn_en[s]),
      .wr_en(wr_en && rw_seg == 8'(s)), .rw_syn, .wr_data, .rd_data(seg_rd[s])
    );
    assign seg_learn_en[s] = learn_en &&
      (PROX ? (fired_q && pwin_q == 8'(s)) : (dfired_q && dwin_q == 8'(s)));
  end

  // proximal WTA: earliest step (only segments spiking now, before the
  // dendrite has fired), then largest potential, then lowest index
  logic          pany;
  logic [7:0]    pidx;
  logic [PW-1:0] pbest;
  always_comb begin
    pany  = 1'b0;
    pidx  = '0;
    pbest = '0;
    for (int s = N_DIST; s < NSEG; s++)
      if (seg_spike[s] && (!pany || seg_pot[s] > pbest)) begin
        pany  = 1'b1;
        pidx  = 8'(s);
        pbest = seg_pot[s];
      end
  end

  // distal WTA, same order
  logic          dany;
  logic [7:0]    didx;
  logic [PW-1:0] dbest;
  always_comb begin
    dany  = 1'b0;
    didx  = '0;
    dbest = '0;
    for (int s = 0; s < N_DIST; s++)
      if (seg_spike[s] && (!dany || seg_pot[s] > dbest)) begin
        dany  = 1'b1;
        didx  = 8'(s);
        dbest = seg_pot[s];
      end
  end

  assign spike = pany && !fired_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      depol_q  <= 1'b0;
      fired_q  <= 1'b0;
      dfired_q <= 1'b0;
      pwin_q   <= '0;
      dwin_q   <= '0;
      value_q  <= '0;
    end else if (clear) begin
      depol_q  <= 1'b0;
      fired_q  <= 1'b0;
      dfired_q <= 1'b0;
      pwin_q   <= '0;
      dwin_q   <= '0;
      value_q  <= '0;
    end else begin
      if (dany && !dfired_q) begin
        dfired_q <= 1'b1;
        depol_q  <= 1'b1;
        dwin_q   <= didx;
      end
      if (spike) begin
        fired_q <= 1'b1;
        pwin_q  <= pidx;
        value_q <= pbest;
      end
    end
  end

  assign value       = spike ? pbest : value_q;
  assign win_seg     = spike ? pidx  : pwin_q;
  assign fired       = fired_q;
  assign depolarized = depol_q;

  always_comb begin
    rd_data = '0;
    for (int s = 0; s < NSEG; s++)
      if (rw_seg == 8'(s)) rd_data = seg_rd[s];
  end

endmodule
