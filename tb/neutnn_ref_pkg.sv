// neutnn_ref_pkg: behavioural reference of the NeuTNN hierarchy for the
// testbenches. It works from spike times rather than cycle by cycle state:
// the potential of a segment in step s is the bias plus, for every synapse
// whose input spiked at x <= s, min(s - x + 1, w) (ramp) or w (step). It
// then applies the firing, winner-take-all and STDP rules of the RTL
// documentation. Array bounds are the largest sizes the testbenches use.
package neutnn_ref_pkg;
  import neutnn_pkg::*;

  localparam int MS = 8;   // synapses per segment
  localparam int MG = 8;   // segments per dendrite
  localparam int MD = 4;   // dendrites per neuron
  localparam int MN = 4;   // neurons per minicolumn

  typedef int seg_w_t  [MS];
  typedef int dend_w_t [MG][MS];
  typedef int spk_t    [MS];

  typedef struct {
    int nsyn, ndist, nprox, thd, thp, boost;
    bit snl;
  } cfg_t;

  typedef struct {
    int ft;     // dendrite fire step, -1 none
    int value;  // contribution
    int win;    // winning proximal segment (absolute index)
    int dft;    // first distal fire step, -1 none
    int dwin;   // winning distal segment
  } dres_t;

  function automatic int pot(cfg_t c, seg_w_t w, spk_t x, int s, int bias);
    int p = bias;
    for (int i = 0; i < c.nsyn; i++)
      if (x[i] >= 0 && x[i] <= s)
        p += c.snl ? w[i] : ((s - x[i] + 1 < w[i]) ? s - x[i] + 1 : w[i]);
    return p;
  endfunction

  function automatic dres_t dendrite(cfg_t c, dend_w_t w, spk_t xd, spk_t xp);
    dres_t r;
    int best;
    r.ft = -1; r.value = 0; r.win = 0; r.dft = -1; r.dwin = 0;
    for (int s = 0; s < T_STEPS && r.dft < 0; s++) begin
      best = -1;
      for (int g = 0; g < c.ndist; g++) begin
        int p = pot(c, w[g], xd, s, 0);
        if (p >= c.thd && p > best) begin best = p; r.dft = s; r.dwin = g; end
      end
    end
    for (int s = 0; s < T_STEPS && r.ft < 0; s++) begin
      int b = (r.dft >= 0 && r.dft < s) ? c.boost : 0;
      best = -1;
      for (int g = c.ndist; g < c.ndist + c.nprox; g++) begin
        int p = pot(c, w[g], xp, s, b);
        if (p >= c.thp && p > best) begin best = p; r.ft = s; r.win = g; r.value = p; end
      end
    end
    return r;
  endfunction

  // STDP of one segment's weights given its output spike (ft < 0: none)
  function automatic seg_w_t stdp(cfg_t c, seg_w_t w, spk_t x, int ft);
    seg_w_t n = w;
    for (int i = 0; i < c.nsyn; i++) begin
      if (x[i] >= 0 && (ft < 0 || x[i] <= ft)) n[i] = (w[i] < WMAX) ? w[i] + 1 : w[i];
      else if (ft >= 0) n[i] = (w[i] > 0) ? w[i] - 1 : 0;
    end
    return n;
  endfunction

endpackage
