// tb_neutnn_layer: self-checking test of a layer with overlapping kernels.
//
// 3 minicolumns, kernel 4, stride 2, 8 inputs: minicolumn m sees inputs
// 2m..2m+3, so neighbouring minicolumns share two inputs. Each minicolumn
// has 2 neurons of 1 dendrite (1 distal + 2 proximal segments). Random
// trials load random weights, apply random spike times to the 8 layer
// inputs, and compare every minicolumn's winner pulse (its position in the
// concatenated output), win_id and win_time with the reference model applied
// to that minicolumn's window. One learning trial in two reads all weights
// back against the STDP reference.
module tb_neutnn_layer;
  import neutnn_pkg::*;
  import neutnn_ref_pkg::*;

  localparam int NM = 3, K = 4, ST = 2, IW = 8, NN = 2, ND = 1, NDI = 1, NPR = 2;
  localparam int NG = NDI + NPR;
  localparam int THD = 8, THP = 12, BST = 4;
  localparam cfg_t C = '{nsyn: K, ndist: NDI, nprox: NPR, thd: THD, thp: THP,
                         boost: BST, snl: 1'b0};

  logic clk = 0, rst_n = 0, clear = 0, run = 0, learn = 0;
  tstep_t t = '0;
  logic [IW-1:0] distal_in = '0, prox_in = '0;
  logic [NM*NN-1:0] out_spike;
  logic [NM-1:0] win_valid;
  logic [7:0] win_id [NM];
  tstep_t win_time [NM];
  logic wr_en = 0;
  logic [1:0] rw_mc = 0;
  logic [7:0] rw_neuron = 0, rw_dend = 0, rw_seg = 0;
  logic [9:0] rw_syn = 0;
  weight_t wr_data = 0, rd_data;
  int checks = 0, failures = 0, n_win = 0, n_learn = 0;

  always #5 clk = ~clk;

  neutnn_layer #(
    .N_MC(NM), .KERNEL(K), .STRIDE(ST), .IN_W(IW), .N_NEURON(NN), .N_DEND(ND),
    .N_DIST(NDI), .N_PROX(NPR), .RESP(RESP_RNL), .THETA_DIST(THD),
    .THETA_PROX(THP), .BOOST(BST)
  ) dut (
    .clk, .rst_n, .clear, .run, .t, .distal_in, .prox_in, .out_spike,
    .win_valid, .win_id, .win_time, .learn, .wr_en, .rw_mc, .rw_neuron,
    .rw_dend, .rw_seg, .rw_syn, .wr_data, .rd_data);

  dend_w_t w [NM][MN][MD];
  int xd [IW], xp [IW];

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    spk_t wd [NM], wp [NM];
    dres_t dr [NM][MN];
    int en [NM], et [NM], gt [NM], gid [NM], nspk [NM];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 100; k++) begin
      for (int m = 0; m < NM; m++) for (int n = 0; n < NN; n++)
        for (int g = 0; g < NG; g++) for (int i = 0; i < K; i++) begin
          w[m][n][0][g][i] = $urandom_range(WMAX, 0);
          @(negedge clk); wr_en = 1; rw_mc = 2'(m); rw_neuron = 8'(n);
          rw_dend = 0; rw_seg = 8'(g); rw_syn = 10'(i);
          wr_data = weight_t'(w[m][n][0][g][i]);
        end
      @(negedge clk); wr_en = 0;
      for (int i = 0; i < IW; i++) begin
        xd[i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(3, 0);
        xp[i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(T_STEPS - 1, 0);
      end
      for (int m = 0; m < NM; m++) begin
        int ev;
        for (int i = 0; i < MS; i++) begin
          wd[m][i] = (i < K) ? xd[m*ST + i] : -1;
          wp[m][i] = (i < K) ? xp[m*ST + i] : -1;
        end
        en[m] = -1; et[m] = -1; ev = -1;
        for (int n = 0; n < NN; n++) begin
          dr[m][n] = dendrite(C, w[m][n][0], wd[m], wp[m]);
          if (dr[m][n].ft >= 0 && (et[m] < 0 || dr[m][n].ft < et[m] ||
              (dr[m][n].ft == et[m] && dr[m][n].value > ev))) begin
            en[m] = n; et[m] = dr[m][n].ft; ev = dr[m][n].value;
          end
        end
        gt[m] = -1; gid[m] = -1; nspk[m] = 0;
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int s = 0; s < T_STEPS; s++) begin
        run = 1; t = tstep_t'(s);
        for (int i = 0; i < IW; i++) begin
          distal_in[i] = (xd[i] == s);
          prox_in[i]   = (xp[i] == s);
        end
        #1;
        for (int m = 0; m < NM; m++)
          for (int n = 0; n < NN; n++)
            if (out_spike[m*NN + n]) begin nspk[m]++; gt[m] = s; gid[m] = n; end
        @(negedge clk);
      end
      run = 0; distal_in = '0; prox_in = '0;
      for (int m = 0; m < NM; m++) begin
        check($sformatf("mc%0d spikes", m), nspk[m], (en[m] >= 0) ? 1 : 0);
        check($sformatf("mc%0d step", m), gt[m], et[m]);
        check($sformatf("mc%0d neuron", m), gid[m], en[m]);
        check($sformatf("mc%0d valid", m), int'(win_valid[m]), int'(en[m] >= 0));
        if (en[m] >= 0) begin
          n_win++;
          check($sformatf("mc%0d win_id", m), int'(win_id[m]), en[m]);
          check($sformatf("mc%0d win_time", m), int'(win_time[m]), et[m]);
        end
      end
      if (k % 2 == 1) begin
        @(negedge clk); learn = 1; @(negedge clk); learn = 0;
        for (int m = 0; m < NM; m++) if (en[m] >= 0) begin
          dres_t r;
          seg_w_t wprev;
          r = dr[m][en[m]];
          wprev = w[m][en[m]][0][r.win];
          w[m][en[m]][0][r.win] = stdp(C, wprev, wp[m], r.ft);
          if (w[m][en[m]][0][r.win] != wprev) n_learn++;
          if (r.dft >= 0) w[m][en[m]][0][r.dwin] = stdp(C, w[m][en[m]][0][r.dwin], wd[m], r.dft);
        end
        for (int m = 0; m < NM; m++) for (int n = 0; n < NN; n++)
          for (int g = 0; g < NG; g++) for (int i = 0; i < K; i++) begin
            rw_mc = 2'(m); rw_neuron = 8'(n); rw_dend = 0; rw_seg = 8'(g); rw_syn = 10'(i);
            #1 check($sformatf("w m%0d n%0d g%0d s%0d", m, n, g, i), int'(rd_data), w[m][n][0][g][i]);
          end
      end
    end
    $display("events: winners=%0d learned=%0d", n_win, n_learn);
    check("winner seen", int'(n_win > 0), 1);
    check("learning seen", int'(n_learn > 0), 1);
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
