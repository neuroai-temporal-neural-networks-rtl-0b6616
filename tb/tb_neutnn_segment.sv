// tb_neutnn_segment: self-checking test of one segment.
//
// The point-neuron example (weights 3,4,1,2, inputs 1,1,0,1, threshold 6)
// must fire in step 0 with potential 9 under step-no-leak, and in step 1 with
// potential 6 under ramp-no-leak. Random windows with random weights, spike
// times and bias are then compared against a reference that recomputes the
// potential of every step from the spike times; the spike must come exactly
// once, in the first step at or above threshold, and fired/fire_t must hold.
module tb_neutnn_segment;
  import neutnn_pkg::*;

  localparam int N  = 4;
  localparam int PW = $clog2(N * WMAX + 64);
  localparam int TH = 6;
  logic clk = 0, rst_n = 0, clear = 0, run = 0, learn = 0;
  tstep_t t = '0;
  logic [N-1:0] in_spike = '0;
  logic [PW-1:0] bias = '0;
  logic wr_en = 0;
  logic [9:0] rw_syn = '0;
  weight_t wr_data = '0;
  logic sp_r, sp_s, fd_r, fd_s;
  tstep_t ft_r, ft_s;
  logic [PW-1:0] pot_r, pot_s;
  weight_t rd_r, rd_s;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  neutnn_segment #(.NUM_SYN(N), .RESP(RESP_RNL), .THETA(TH)) dut_r (
    .clk, .rst_n, .clear, .run, .t, .in_spike, .bias, .spike(sp_r),
    .fired(fd_r), .fire_t(ft_r), .pot(pot_r), .learn, .learn_en(1'b0),
    .wr_en, .rw_syn, .wr_data, .rd_data(rd_r));
  neutnn_segment #(.NUM_SYN(N), .RESP(RESP_SNL), .THETA(TH)) dut_s (
    .clk, .rst_n, .clear, .run, .t, .in_spike, .bias, .spike(sp_s),
    .fired(fd_s), .fire_t(ft_s), .pot(pot_s), .learn, .learn_en(1'b0),
    .wr_en, .rw_syn, .wr_data, .rd_data(rd_s));

  int w [N];
  int x [N];

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int ref_pot(bit snl, int s, int b);
    int p = b;
    for (int i = 0; i < N; i++)
      if (x[i] >= 0 && x[i] <= s)
        p += snl ? w[i] : ((s - x[i] + 1 < w[i]) ? s - x[i] + 1 : w[i]);
    return p;
  endfunction

  task automatic load(input int ws[N]);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); wr_en = 1; rw_syn = 10'(i); wr_data = weight_t'(ws[i]);
      w[i] = ws[i];
    end
    @(negedge clk); wr_en = 0;
  endtask

  // run a window; returns fire steps (-1 none) and potentials at firing
  task automatic window(int b, output int fr, output int fs,
                        output int pr, output int ps);
    int nr = 0, ns = 0;
    fr = -1; fs = -1; pr = 0; ps = 0;
    bias = PW'(b);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int s = 0; s < T_STEPS; s++) begin
      run = 1; t = tstep_t'(s);
      for (int i = 0; i < N; i++) in_spike[i] = (x[i] == s);
      #1;
      check("pot rnl", int'(pot_r), ref_pot(0, s, b));
      check("pot snl", int'(pot_s), ref_pot(1, s, b));
      if (sp_r) begin nr++; if (fr < 0) begin fr = s; pr = int'(pot_r); end end
      if (sp_s) begin ns++; if (fs < 0) begin fs = s; ps = int'(pot_s); end end
      @(negedge clk);
    end
    run = 0; in_spike = '0;
    check("rnl spikes at most once", (nr <= 1), 1);
    check("snl spikes at most once", (ns <= 1), 1);
    check("rnl fired flag", int'(fd_r), int'(fr >= 0));
    check("snl fired flag", int'(fd_s), int'(fs >= 0));
    if (fr >= 0) check("rnl fire_t", int'(ft_r), fr);
    if (fs >= 0) check("snl fire_t", int'(ft_s), fs);
  endtask

  function automatic int ref_fire(bit snl, int b);
    for (int s = 0; s < T_STEPS; s++) if (ref_pot(snl, s, b) >= TH) return s;
    return -1;
  endfunction

  initial begin
    int fr, fs, pr, ps;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load('{3, 4, 1, 2});
    x = '{0, 0, -1, 0};
    window(0, fr, fs, pr, ps);
    check("example snl step", fs, 0);
    check("example snl pot", ps, 9);
    check("example rnl step", fr, 1);
    check("example rnl pot", pr, 6);
    // bias brings the ramp version over threshold one step earlier
    window(3, fr, fs, pr, ps);
    check("bias rnl step", fr, 0);
    for (int k = 0; k < 60; k++) begin
      int ws[N]; int b;
      for (int i = 0; i < N; i++) ws[i] = $urandom_range(WMAX, 0);
      load(ws);
      for (int i = 0; i < N; i++) x[i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(T_STEPS - 1, 0);
      b = $urandom_range(2, 0);
      window(b, fr, fs, pr, ps);
      check("rand rnl fire", fr, ref_fire(0, b));
      check("rand snl fire", fs, ref_fire(1, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
