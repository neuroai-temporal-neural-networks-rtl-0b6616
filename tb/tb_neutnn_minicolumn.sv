// tb_neutnn_minicolumn: self-checking test of a small minicolumn.
//
// 3 neurons x 2 dendrites x (2 distal + 2 proximal) segments x 6 synapses,
// ramp-no-leak. Each trial loads random weights through the weight port,
// applies random distal and proximal spike times, and compares the one-hot
// winner pulse, its step, win_id and win_time with the reference model of
// neutnn_ref_pkg. Every other trial then applies a learn strobe and reads
// back all weights: only the winning neuron's winning dendrite's winning
// proximal and distal segments may have changed, by the STDP rule. The test
// counts how often a winner was found, how often distal depolarisation
// decided the step, and how often learning changed a weight, and fails if
// any of these never happened.
module tb_neutnn_minicolumn;
  import neutnn_pkg::*;
  import neutnn_ref_pkg::*;

  localparam int NN = 3, ND = 2, NDI = 2, NPR = 2, NS = 6, NG = NDI + NPR;
  localparam int THD = 10, THP = 14, BST = 4;
  localparam cfg_t C = '{nsyn: NS, ndist: NDI, nprox: NPR, thd: THD, thp: THP,
                         boost: BST, snl: 1'b0};

  logic clk = 0, rst_n = 0, clear = 0, run = 0, learn = 0;
  tstep_t t = '0;
  logic [NS-1:0] distal_in = '0, prox_in = '0;
  logic [NN-1:0] out_spike;
  logic win_valid;
  logic [7:0] win_id;
  tstep_t win_time;
  logic wr_en = 0;
  logic [7:0] rw_neuron = 0, rw_dend = 0, rw_seg = 0;
  logic [9:0] rw_syn = 0;
  weight_t wr_data = 0, rd_data;
  int checks = 0, failures = 0;
  int n_win = 0, n_nowin = 0, n_boost = 0, n_learn = 0;

  always #5 clk = ~clk;

  neutnn_minicolumn #(
    .N_NEURON(NN), .NUM_SYN(NS), .N_DEND(ND), .N_DIST(NDI), .N_PROX(NPR),
    .RESP(RESP_RNL), .THETA_DIST(THD), .THETA_PROX(THP), .BOOST(BST)
  ) dut (
    .clk, .rst_n, .clear, .run, .t, .distal_in, .prox_in, .out_spike,
    .win_valid, .win_id, .win_time, .learn, .wr_en, .rw_neuron, .rw_dend,
    .rw_seg, .rw_syn, .wr_data, .rd_data);

  dend_w_t w [MN][MD];
  spk_t xd, xp;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic load_all();
    for (int n = 0; n < NN; n++) for (int d = 0; d < ND; d++)
      for (int g = 0; g < NG; g++) for (int i = 0; i < NS; i++) begin
        @(negedge clk);
        wr_en = 1; rw_neuron = 8'(n); rw_dend = 8'(d); rw_seg = 8'(g);
        rw_syn = 10'(i); wr_data = weight_t'(w[n][d][g][i]);
      end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic verify_all(string what);
    for (int n = 0; n < NN; n++) for (int d = 0; d < ND; d++)
      for (int g = 0; g < NG; g++) for (int i = 0; i < NS; i++) begin
        rw_neuron = 8'(n); rw_dend = 8'(d); rw_seg = 8'(g); rw_syn = 10'(i);
        #1 check($sformatf("%s n%0d d%0d g%0d s%0d", what, n, d, g, i),
                 int'(rd_data), w[n][d][g][i]);
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 120; k++) begin
      int en, et, ev, ed, nspk, got_t, got_id;
      dres_t dr [MN][MD];
      dres_t best;
      for (int n = 0; n < NN; n++) for (int d = 0; d < ND; d++)
        for (int g = 0; g < NG; g++) for (int i = 0; i < NS; i++)
          w[n][d][g][i] = $urandom_range(WMAX, 0);
      for (int i = 0; i < NS; i++) begin
        xd[i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(3, 0);
        xp[i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(T_STEPS - 1, 0);
      end
      load_all();
      // reference
      en = -1; et = -1; ev = -1; ed = 0;
      for (int n = 0; n < NN; n++) begin
        int nt, nv, nd;
        nt = -1; nv = -1; nd = 0;
        for (int d = 0; d < ND; d++) begin
          dr[n][d] = dendrite(C, w[n][d], xd, xp);
          if (dr[n][d].ft >= 0 && (nt < 0 || dr[n][d].ft < nt ||
              (dr[n][d].ft == nt && dr[n][d].value > nv))) begin
            nt = dr[n][d].ft; nv = dr[n][d].value; nd = d;
          end
        end
        if (nt >= 0 && (et < 0 || nt < et || (nt == et && nv > ev))) begin
          en = n; et = nt; ev = nv; ed = nd;
        end
      end
      // is the decision influenced by the distal boost?
      begin
        cfg_t c0;
        int t0;
        t0 = -1;
        c0 = C;
        c0.boost = 0;
        for (int n = 0; n < NN; n++) for (int d = 0; d < ND; d++) begin
          dres_t r0;
          r0 = dendrite(c0, w[n][d], xd, xp);
          if (r0.ft >= 0 && (t0 < 0 || r0.ft < t0)) t0 = r0.ft;
        end
        if (t0 != et) n_boost++;
      end
      // DUT window
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      nspk = 0; got_t = -1; got_id = -1;
      for (int s = 0; s < T_STEPS; s++) begin
        run = 1; t = tstep_t'(s);
        for (int i = 0; i < NS; i++) begin
          distal_in[i] = (xd[i] == s);
          prox_in[i]   = (xp[i] == s);
        end
        #1;
        if (out_spike != 0) begin
          nspk++; got_t = s;
          for (int n = 0; n < NN; n++) if (out_spike[n]) got_id = n;
        end
        @(negedge clk);
      end
      run = 0; distal_in = '0; prox_in = '0;
      check("spike count", nspk, (en >= 0) ? 1 : 0);
      check("spike step", got_t, et);
      check("spike neuron", got_id, en);
      check("win_valid", int'(win_valid), int'(en >= 0));
      if (en >= 0) begin
        n_win++;
        check("win_id", int'(win_id), en);
        check("win_time", int'(win_time), et);
      end else n_nowin++;
      if (k % 2 == 1) begin
        @(negedge clk); learn = 1; @(negedge clk); learn = 0;
        if (en >= 0) begin
          dres_t r;
          seg_w_t wprev;
          r = dr[en][ed];
          wprev = w[en][ed][r.win];
          w[en][ed][r.win] = stdp(C, w[en][ed][r.win], xp, r.ft);
          if (w[en][ed][r.win] != wprev) n_learn++;
          if (r.dft >= 0)
            w[en][ed][r.dwin] = stdp(C, w[en][ed][r.dwin], xd, r.dft);
        end
        verify_all("stdp");
      end
    end
    $display("events: winners=%0d no_winner=%0d boost_decided=%0d learned=%0d",
             n_win, n_nowin, n_boost, n_learn);
    check("winner seen", int'(n_win > 0), 1);
    check("no-winner window seen", int'(n_nowin > 0), 1);
    check("boost decided a window", int'(n_boost > 0), 1);
    check("learning changed weights", int'(n_learn > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
