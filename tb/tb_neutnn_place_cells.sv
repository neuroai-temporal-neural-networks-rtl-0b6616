// tb_neutnn_place_cells: end-to-end test of the place-cell top at reduced
// size.
//
// Minicolumn 0 has 3 neurons of 6-synapse segments, minicolumns 1 and 2 have
// 2 neurons of 5-synapse segments; every neuron has 2 dendrites of 2 distal
// + 2 proximal segments. Each trial loads random weights into all three
// minicolumns through the weight port, pulses start (with or without
// learning), feeds random spike pulses in the steps shown on t, and checks:
// the window length (done T_STEPS+1 cycles after start without learning,
// T_STEPS+2 with), busy, each minicolumn's one-hot winner pulse and its
// win_valid/win_id/win_time against the reference model, and, after a
// learning window, every weight read back against the STDP reference. It
// counts the mechanisms of the design and fails if one never happened:
// inference window, learning window, winner, no winner, a step decided by
// the distal boost, a weight changed by learning, a start ignored while busy.
module tb_neutnn_place_cells;
  import neutnn_pkg::*;
  import neutnn_ref_pkg::*;

  localparam int N1 = 3, S1 = 6, N2 = 2, S2 = 5;
  localparam int ND = 2, NDI = 2, NPR = 2, NG = NDI + NPR;
  localparam int THD = 10, THP = 14, BST = 4;

  logic clk = 0, rst_n = 0, start = 0, learn_mode = 0;
  logic busy, done;
  tstep_t t;
  logic [S1-1:0] mc1_d = '0, mc1_p = '0;
  logic [S2-1:0] mc2a_d = '0, mc2a_p = '0, mc2b_d = '0, mc2b_p = '0;
  logic [N1-1:0] mc1_out;
  logic [N2-1:0] mc2a_out, mc2b_out;
  logic [2:0] win_valid;
  logic [7:0] win_id [3];
  tstep_t win_time [3];
  wt_req_t wt;
  weight_t wt_rdata;
  int checks = 0, failures = 0;
  int n_inf = 0, n_lrn = 0, n_win = 0, n_nowin = 0, n_boost = 0, n_chg = 0,
      n_ignored = 0;

  always #5 clk = ~clk;

  neutnn_place_cells #(
    .MC1_NEURON(N1), .MC1_SYN(S1), .MC2_NEURON(N2), .MC2_SYN(S2),
    .N_DEND(ND), .N_DIST(NDI), .N_PROX(NPR), .RESP(RESP_RNL),
    .THETA_DIST(THD), .THETA_PROX(THP), .BOOST(BST)
  ) dut (
    .clk, .rst_n, .start, .learn_mode, .busy, .done, .t,
    .mc1_distal_in(mc1_d), .mc1_prox_in(mc1_p),
    .mc2a_distal_in(mc2a_d), .mc2a_prox_in(mc2a_p),
    .mc2b_distal_in(mc2b_d), .mc2b_prox_in(mc2b_p),
    .mc1_out_spike(mc1_out), .mc2a_out_spike(mc2a_out),
    .mc2b_out_spike(mc2b_out), .win_valid, .win_id, .win_time, .wt, .wt_rdata);

  dend_w_t w [3][MN][MD];
  spk_t xd [3], xp [3];
  dres_t dr [3][MN][MD];
  int en [3], et [3], ed [3];

  function automatic int nneu(int m); return (m == 0) ? N1 : N2; endfunction
  function automatic int nsyn(int m); return (m == 0) ? S1 : S2; endfunction
  function automatic cfg_t cfg(int m, int boost);
    cfg_t c;
    c.nsyn = nsyn(m); c.ndist = NDI; c.nprox = NPR; c.thd = THD; c.thp = THP;
    c.boost = boost; c.snl = 1'b0;
    return c;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic load_all();
    for (int m = 0; m < 3; m++) for (int n = 0; n < nneu(m); n++)
      for (int d = 0; d < ND; d++) for (int g = 0; g < NG; g++)
        for (int i = 0; i < nsyn(m); i++) begin
          @(negedge clk);
          wt.we = 1'b1; wt.addr.mc = 2'(m); wt.addr.neuron = 8'(n);
          wt.addr.dend = 8'(d); wt.addr.seg = 8'(g); wt.addr.syn = 10'(i);
          wt.wdata = weight_t'(w[m][n][d][g][i]);
        end
    @(negedge clk); wt.we = 1'b0;
  endtask

  task automatic verify_all();
    for (int m = 0; m < 3; m++) for (int n = 0; n < nneu(m); n++)
      for (int d = 0; d < ND; d++) for (int g = 0; g < NG; g++)
        for (int i = 0; i < nsyn(m); i++) begin
          wt.addr.mc = 2'(m); wt.addr.neuron = 8'(n); wt.addr.dend = 8'(d);
          wt.addr.seg = 8'(g); wt.addr.syn = 10'(i);
          #1 check($sformatf("w m%0d n%0d d%0d g%0d s%0d", m, n, d, g, i),
                   int'(wt_rdata), w[m][n][d][g][i]);
        end
  endtask

  // reference winner of minicolumn m
  task automatic reference(int m);
    int ev, t0;
    en[m] = -1; et[m] = -1; ev = -1; ed[m] = 0; t0 = -1;
    for (int n = 0; n < nneu(m); n++) begin
      int nt, nv, nd;
      nt = -1; nv = -1; nd = 0;
      for (int d = 0; d < ND; d++) begin
        dres_t r0;
        dr[m][n][d] = dendrite(cfg(m, BST), w[m][n][d], xd[m], xp[m]);
        r0 = dendrite(cfg(m, 0), w[m][n][d], xd[m], xp[m]);
        if (r0.ft >= 0 && (t0 < 0 || r0.ft < t0)) t0 = r0.ft;
        if (dr[m][n][d].ft >= 0 && (nt < 0 || dr[m][n][d].ft < nt ||
            (dr[m][n][d].ft == nt && dr[m][n][d].value > nv))) begin
          nt = dr[m][n][d].ft; nv = dr[m][n][d].value; nd = d;
        end
      end
      if (nt >= 0 && (et[m] < 0 || nt < et[m] || (nt == et[m] && nv > ev))) begin
        en[m] = n; et[m] = nt; ev = nv; ed[m] = nd;
      end
    end
    if (t0 != et[m]) n_boost++;
  endtask

  function automatic int onehot_idx(logic [7:0] v);
    for (int i = 0; i < 8; i++) if (v[i]) return i;
    return -1;
  endfunction

  initial begin
    wt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      bit lm;
      int cyc, gt [3], gid [3], nspk [3];
      lm = (k % 2 == 1);
      for (int m = 0; m < 3; m++) begin
        for (int n = 0; n < nneu(m); n++) for (int d = 0; d < ND; d++)
          for (int g = 0; g < NG; g++) for (int i = 0; i < nsyn(m); i++)
            w[m][n][d][g][i] = $urandom_range(WMAX, 0);
        for (int i = 0; i < MS; i++) begin
          xd[m][i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(3, 0);
          xp[m][i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(T_STEPS - 1, 0);
        end
        reference(m);
        gt[m] = -1; gid[m] = -1; nspk[m] = 0;
      end
      load_all();
      @(negedge clk); start = 1; learn_mode = lm;
      @(negedge clk); start = 0;
      cyc = 1;
      // a second start while busy must be ignored
      start = 1; #1 if (busy) n_ignored++;
      @(negedge clk); start = 0; cyc++;
      forever begin
        if (dut.run) begin
          int s;
          s = int'(t);
          mc1_d  = '0; mc1_p  = '0; mc2a_d = '0; mc2a_p = '0; mc2b_d = '0; mc2b_p = '0;
          for (int i = 0; i < S1; i++) begin
            mc1_d[i] = (xd[0][i] == s); mc1_p[i] = (xp[0][i] == s);
          end
          for (int i = 0; i < S2; i++) begin
            mc2a_d[i] = (xd[1][i] == s); mc2a_p[i] = (xp[1][i] == s);
            mc2b_d[i] = (xd[2][i] == s); mc2b_p[i] = (xp[2][i] == s);
          end
          #1;
          if (mc1_out  != 0) begin nspk[0]++; gt[0] = s; gid[0] = onehot_idx(8'(mc1_out)); end
          if (mc2a_out != 0) begin nspk[1]++; gt[1] = s; gid[1] = onehot_idx(8'(mc2a_out)); end
          if (mc2b_out != 0) begin nspk[2]++; gt[2] = s; gid[2] = onehot_idx(8'(mc2b_out)); end
        end
        if (done) break;
        @(negedge clk); cyc++;
        mc1_d = '0; mc1_p = '0; mc2a_d = '0; mc2a_p = '0; mc2b_d = '0; mc2b_p = '0;
        if (cyc > 40) break;
      end
      check("window length", cyc, lm ? T_STEPS + 2 : T_STEPS + 1);
      @(negedge clk);
      check("idle after done", int'(busy), 0);
      if (lm) n_lrn++; else n_inf++;
      for (int m = 0; m < 3; m++) begin
        check($sformatf("mc%0d spikes", m), nspk[m], (en[m] >= 0) ? 1 : 0);
        check($sformatf("mc%0d step", m), gt[m], et[m]);
        check($sformatf("mc%0d neuron", m), gid[m], en[m]);
        check($sformatf("mc%0d win_valid", m), int'(win_valid[m]), int'(en[m] >= 0));
        if (en[m] >= 0) begin
          n_win++;
          check($sformatf("mc%0d win_id", m), int'(win_id[m]), en[m]);
          check($sformatf("mc%0d win_time", m), int'(win_time[m]), et[m]);
          if (lm) begin
            dres_t r;
            seg_w_t wprev;
            r = dr[m][en[m]][ed[m]];
            wprev = w[m][en[m]][ed[m]][r.win];
            w[m][en[m]][ed[m]][r.win] = stdp(cfg(m, BST), wprev, xp[m], r.ft);
            if (w[m][en[m]][ed[m]][r.win] != wprev) n_chg++;
            if (r.dft >= 0)
              w[m][en[m]][ed[m]][r.dwin] = stdp(cfg(m, BST), w[m][en[m]][ed[m]][r.dwin], xd[m], r.dft);
          end
        end else n_nowin++;
      end
      verify_all();
    end
    $display("events: inference=%0d learning=%0d winners=%0d no_winner=%0d boost_decided=%0d weights_learned=%0d start_ignored=%0d",
             n_inf, n_lrn, n_win, n_nowin, n_boost, n_chg, n_ignored);
    check("inference window", int'(n_inf > 0), 1);
    check("learning window", int'(n_lrn > 0), 1);
    check("winner", int'(n_win > 0), 1);
    check("no winner", int'(n_nowin > 0), 1);
    check("boost decided", int'(n_boost > 0), 1);
    check("weights learned", int'(n_chg > 0), 1);
    check("start ignored while busy", int'(n_ignored > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
