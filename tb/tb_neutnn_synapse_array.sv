// tb_neutnn_synapse_array: self-checking test of the synapse bank.
//
// Two 4-synapse banks, one ramp-no-leak and one step-no-leak, get the
// point-neuron example of weights 3,4,1,2 with inputs 1,1,0,1 at step 0:
// the step responses must sum to 3+4+0+2 = 9 in every step, the ramp
// responses to min(t+1,w) summed. A random phase then compares every
// response against a reference computed here from the spike times, and a
// learning phase checks each STDP case (capture, backoff, search, none) and
// the saturation at 0 and WMAX through the read port.
module tb_neutnn_synapse_array;
  import neutnn_pkg::*;

  localparam int N = 4;
  logic clk = 0, rst_n = 0, clear = 0, run = 0, learn = 0, learn_en = 0;
  logic post_fired = 0;
  tstep_t t = '0, post_t = '0;
  logic [N-1:0] in_spike = '0;
  weight_t resp_r [N], resp_s [N];
  logic wr_en = 0;
  logic [9:0] rw_syn = '0;
  weight_t wr_data = '0, rd_r, rd_s;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  neutnn_synapse_array #(.NUM_SYN(N), .RESP(RESP_RNL)) dut_r (
    .clk, .rst_n, .clear, .run, .t, .in_spike, .resp(resp_r), .learn,
    .learn_en, .post_fired, .post_t, .wr_en, .rw_syn, .wr_data, .rd_data(rd_r));
  neutnn_synapse_array #(.NUM_SYN(N), .RESP(RESP_SNL)) dut_s (
    .clk, .rst_n, .clear, .run, .t, .in_spike, .resp(resp_s), .learn,
    .learn_en, .post_fired, .post_t, .wr_en, .rw_syn, .wr_data, .rd_data(rd_s));

  int w [N];
  int x [N];   // spike time, -1 = none

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic load(input int ws[N]);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); wr_en = 1; rw_syn = 10'(i); wr_data = weight_t'(ws[i]);
      w[i] = ws[i];
    end
    @(negedge clk); wr_en = 0;
  endtask

  // one window with spike times x; checks every response in every step
  task automatic window();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int s = 0; s < T_STEPS; s++) begin
      run = 1; t = tstep_t'(s);
      for (int i = 0; i < N; i++) in_spike[i] = (x[i] == s);
      #1;
      for (int i = 0; i < N; i++) begin
        int er, es;
        es = (x[i] >= 0 && x[i] <= s) ? w[i] : 0;
        er = (x[i] >= 0 && x[i] <= s) ? ((s - x[i] + 1 < w[i]) ? s - x[i] + 1 : w[i]) : 0;
        check($sformatf("rnl syn%0d t%0d", i, s), int'(resp_r[i]), er);
        check($sformatf("snl syn%0d t%0d", i, s), int'(resp_s[i]), es);
      end
      @(negedge clk);
    end
    run = 0; in_spike = '0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // point-neuron example: weights 3 4 1 2, inputs 1 1 0 1
    load('{3, 4, 1, 2});
    x = '{0, 0, -1, 0};
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    run = 1; t = '0; in_spike = 4'b1011; #1;
    check("snl sum", int'(resp_s[0]) + int'(resp_s[1]) + int'(resp_s[2]) + int'(resp_s[3]), 9);
    check("rnl sum t0", int'(resp_r[0]) + int'(resp_r[1]) + int'(resp_r[2]) + int'(resp_r[3]), 3);
    @(negedge clk); in_spike = '0; t = 3; #1;
    check("snl sum t3", int'(resp_s[0]) + int'(resp_s[1]) + int'(resp_s[2]) + int'(resp_s[3]), 9);
    check("rnl sum t3", int'(resp_r[0]) + int'(resp_r[1]) + int'(resp_r[2]) + int'(resp_r[3]), 3+4+2);
    run = 0;
    window();
    // random windows
    for (int k = 0; k < 40; k++) begin
      int ws[N];
      for (int i = 0; i < N; i++) ws[i] = $urandom_range(WMAX, 0);
      load(ws);
      for (int i = 0; i < N; i++) x[i] = ($urandom_range(3, 0) == 0) ? -1 : $urandom_range(T_STEPS - 1, 0);
      window();
    end
    // STDP: output at step 3; syn0 in at 1 (capture), syn1 in at 5 (backoff),
    // syn2 no input (backoff), syn3 in at 3 (capture, same step)
    load('{3, 3, 3, 7});
    x = '{1, 5, -1, 3};
    window();
    @(negedge clk); post_fired = 1; post_t = 3; learn = 1; learn_en = 1;
    @(negedge clk); learn = 0;
    rw_syn = 0; #1; check("capture", int'(rd_r), 4);
    rw_syn = 1; #1; check("backoff late", int'(rd_r), 2);
    rw_syn = 2; #1; check("backoff none", int'(rd_r), 2);
    rw_syn = 3; #1; check("saturate max", int'(rd_r), 7);
    // learn_en low: nothing changes
    @(negedge clk); learn = 1; learn_en = 0; @(negedge clk); learn = 0;
    rw_syn = 0; #1; check("no learn_en", int'(rd_s), 4);
    // search: no output spike, input spike -> +1; no input -> unchanged
    load('{0, 0, 5, 1});
    x = '{2, -1, 0, -1};
    window();
    @(negedge clk); post_fired = 0; learn = 1; learn_en = 1;
    @(negedge clk); learn = 0;
    rw_syn = 0; #1; check("search", int'(rd_s), 1);
    rw_syn = 1; #1; check("idle", int'(rd_s), 0);
    rw_syn = 2; #1; check("search2", int'(rd_s), 6);
    // backoff saturates at 0
    load('{0, 0, 0, 0});
    x = '{-1, -1, -1, -1};
    window();
    @(negedge clk); post_fired = 1; learn = 1; @(negedge clk); learn = 0;
    rw_syn = 0; #1; check("saturate 0", int'(rd_s), 0);
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
