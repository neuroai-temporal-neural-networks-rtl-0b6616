// tb_neutnn_neuron: self-checking test of one neuron.
//
// 3 dendrites x (2 distal + 2 proximal) segments x 5 synapses, step-no-leak.
// Random trials compare the neuron's spike step, value and winning dendrite
// with the reference: dendrites that fire in the earliest step survive the
// winner-take-all, the largest contribution among them wins (lowest index on
// a tie). Every other trial learns with learn_en and all weights are read
// back: only the winning dendrite's winning segments may change. The test
// fails if it never saw two dendrites fire in the same earliest step.
module tb_neutnn_neuron;
  import neutnn_pkg::*;
  import neutnn_ref_pkg::*;

  localparam int ND = 3, NDI = 2, NPR = 2, NS = 5, NG = NDI + NPR;
  localparam int PW = $clog2(NS * WMAX + 64);
  localparam int THD = 12, THP = 16, BST = 5;
  localparam cfg_t C = '{nsyn: NS, ndist: NDI, nprox: NPR, thd: THD, thp: THP,
                         boost: BST, snl: 1'b1};

  logic clk = 0, rst_n = 0, clear = 0, run = 0, learn = 0, learn_en = 0;
  tstep_t t = '0;
  logic [NS-1:0] distal_in = '0, prox_in = '0;
  logic spike, fired;
  logic [PW-1:0] value;
  logic [7:0] win_dend;
  logic wr_en = 0;
  logic [7:0] rw_dend = 0, rw_seg = 0;
  logic [9:0] rw_syn = 0;
  weight_t wr_data = 0, rd_data;
  int checks = 0, failures = 0, n_tie = 0, n_fire = 0;

  always #5 clk = ~clk;

  neutnn_neuron #(
    .NUM_SYN(NS), .N_DEND(ND), .N_DIST(NDI), .N_PROX(NPR), .RESP(RESP_SNL),
    .THETA_DIST(THD), .THETA_PROX(THP), .BOOST(BST)
  ) dut (
    .clk, .rst_n, .clear, .run, .t, .distal_in, .prox_in, .spike, .value,
    .win_dend, .fired, .learn, .learn_en, .wr_en, .rw_dend, .rw_seg, .rw_syn,
    .wr_data, .rd_data);

  dend_w_t w [MD];
  spk_t xd, xp;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    dres_t r [MD];
    int et, ev, ed, nearly, nspk, gt, gv, gd;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 150; k++) begin
      for (int d = 0; d < ND; d++) for (int g = 0; g < NG; g++)
        for (int i = 0; i < NS; i++) begin
          w[d][g][i] = $urandom_range(WMAX, 0);
          @(negedge clk); wr_en = 1; rw_dend = 8'(d); rw_seg = 8'(g);
          rw_syn = 10'(i); wr_data = weight_t'(w[d][g][i]);
        end
      @(negedge clk); wr_en = 0;
      for (int i = 0; i < NS; i++) begin
        xd[i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(3, 0);
        xp[i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(T_STEPS - 1, 0);
      end
      et = -1; ev = -1; ed = -1; nearly = 0;
      for (int d = 0; d < ND; d++) begin
        r[d] = dendrite(C, w[d], xd, xp);
        if (r[d].ft >= 0 && (et < 0 || r[d].ft < et || (r[d].ft == et && r[d].value > ev))) begin
          et = r[d].ft; ev = r[d].value; ed = d;
        end
      end
      for (int d = 0; d < ND; d++) if (et >= 0 && r[d].ft == et) nearly++;
      if (nearly > 1) n_tie++;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      nspk = 0; gt = -1; gv = -1; gd = -1;
      for (int s = 0; s < T_STEPS; s++) begin
        run = 1; t = tstep_t'(s);
        for (int i = 0; i < NS; i++) begin
          distal_in[i] = (xd[i] == s);
          prox_in[i]   = (xp[i] == s);
        end
        #1;
        if (spike) begin nspk++; gt = s; gv = int'(value); gd = int'(win_dend); end
        @(negedge clk);
      end
      run = 0; distal_in = '0; prox_in = '0;
      check("spikes", nspk, (et >= 0) ? 1 : 0);
      check("step", gt, et);
      check("fired", int'(fired), int'(et >= 0));
      if (et >= 0) begin
        n_fire++;
        check("value", gv, ev);
        check("win_dend", gd, ed);
      end
      if (k % 2 == 1) begin
        @(negedge clk); learn = 1; learn_en = 1; @(negedge clk); learn = 0; learn_en = 0;
        if (et >= 0) begin
          w[ed][r[ed].win] = stdp(C, w[ed][r[ed].win], xp, r[ed].ft);
          if (r[ed].dft >= 0) w[ed][r[ed].dwin] = stdp(C, w[ed][r[ed].dwin], xd, r[ed].dft);
        end
        for (int d = 0; d < ND; d++) for (int g = 0; g < NG; g++)
          for (int i = 0; i < NS; i++) begin
            rw_dend = 8'(d); rw_seg = 8'(g); rw_syn = 10'(i);
            #1 check($sformatf("w d%0d g%0d s%0d", d, g, i), int'(rd_data), w[d][g][i]);
          end
      end
    end
    $display("events: fired=%0d same_step_dendrites=%0d", n_fire, n_tie);
    check("tie seen", int'(n_tie > 0), 1);
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
