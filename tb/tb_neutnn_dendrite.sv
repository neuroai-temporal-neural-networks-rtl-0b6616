// tb_neutnn_dendrite: self-checking test of one active dendrite.
//
// 3 distal + 3 proximal segments of 6 synapses, ramp-no-leak. Random trials
// load random weights, apply random distal and proximal spike times, and
// compare the dendrite's spike step, value (contribution of the most
// activated proximal segment), winning segment and depolarisation with the
// reference model. Every other trial learns and all weights are read back:
// only the winning proximal and distal segment may change, by the STDP rule.
// The test fails if it never saw the distal boost change the firing step.
module tb_neutnn_dendrite;
  import neutnn_pkg::*;
  import neutnn_ref_pkg::*;

  localparam int NDI = 3, NPR = 3, NS = 6, NG = NDI + NPR;
  localparam int PW = $clog2(NS * WMAX + 64);
  localparam int THD = 10, THP = 14, BST = 4;
  localparam cfg_t C = '{nsyn: NS, ndist: NDI, nprox: NPR, thd: THD, thp: THP,
                         boost: BST, snl: 1'b0};

  logic clk = 0, rst_n = 0, clear = 0, run = 0, learn = 0, learn_en = 0;
  tstep_t t = '0;
  logic [NS-1:0] distal_in = '0, prox_in = '0;
  logic spike, fired, depolarized;
  logic [PW-1:0] value;
  logic [7:0] win_seg;
  logic wr_en = 0;
  logic [7:0] rw_seg = 0;
  logic [9:0] rw_syn = 0;
  weight_t wr_data = 0, rd_data;
  int checks = 0, failures = 0, n_boost = 0, n_fire = 0;

  always #5 clk = ~clk;

  neutnn_dendrite #(
    .NUM_SYN(NS), .N_DIST(NDI), .N_PROX(NPR), .RESP(RESP_RNL),
    .THETA_DIST(THD), .THETA_PROX(THP), .BOOST(BST)
  ) dut (
    .clk, .rst_n, .clear, .run, .t, .distal_in, .prox_in, .spike, .value,
    .win_seg, .fired, .depolarized, .learn, .learn_en, .wr_en, .rw_seg,
    .rw_syn, .wr_data, .rd_data);

  dend_w_t w;
  spk_t xd, xp;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    dres_t r, r0;
    cfg_t c0;
    int nspk, gt, gv, gw;
    repeat (3) @(negedge clk);
    rst_n = 1;
    c0 = C; c0.boost = 0;
    for (int k = 0; k < 150; k++) begin
      for (int g = 0; g < NG; g++) for (int i = 0; i < NS; i++) begin
        w[g][i] = $urandom_range(WMAX, 0);
        @(negedge clk); wr_en = 1; rw_seg = 8'(g); rw_syn = 10'(i);
        wr_data = weight_t'(w[g][i]);
      end
      @(negedge clk); wr_en = 0;
      for (int i = 0; i < NS; i++) begin
        xd[i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(3, 0);
        xp[i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(T_STEPS - 1, 0);
      end
      r  = dendrite(C, w, xd, xp);
      r0 = dendrite(c0, w, xd, xp);
      if (r.ft != r0.ft) n_boost++;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      nspk = 0; gt = -1; gv = -1; gw = -1;
      for (int s = 0; s < T_STEPS; s++) begin
        run = 1; t = tstep_t'(s);
        for (int i = 0; i < NS; i++) begin
          distal_in[i] = (xd[i] == s);
          prox_in[i]   = (xp[i] == s);
        end
        #1;
        if (spike) begin nspk++; gt = s; gv = int'(value); gw = int'(win_seg); end
        if (r.dft >= 0) check("depolarized", int'(depolarized), int'(s > r.dft));
        @(negedge clk);
      end
      run = 0; distal_in = '0; prox_in = '0;
      check("spikes", nspk, (r.ft >= 0) ? 1 : 0);
      check("step", gt, r.ft);
      check("fired", int'(fired), int'(r.ft >= 0));
      if (r.ft >= 0) begin
        n_fire++;
        check("value", gv, r.value);
        check("win_seg", gw, r.win);
        check("held value", int'(value), r.value);
        check("held win_seg", int'(win_seg), r.win);
      end
      if (k % 2 == 1) begin
        @(negedge clk); learn = 1; learn_en = 1; @(negedge clk); learn = 0; learn_en = 0;
        if (r.ft >= 0) w[r.win] = stdp(C, w[r.win], xp, r.ft);
        if (r.dft >= 0) w[r.dwin] = stdp(C, w[r.dwin], xd, r.dft);
        for (int g = 0; g < NG; g++) for (int i = 0; i < NS; i++) begin
          rw_seg = 8'(g); rw_syn = 10'(i);
          #1 check($sformatf("w g%0d s%0d", g, i), int'(rd_data), w[g][i]);
        end
      end
    end
    $display("events: fired=%0d boost_changed_step=%0d", n_fire, n_boost);
    check("boost seen", int'(n_boost > 0), 1);
    check("fire seen", int'(n_fire > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
