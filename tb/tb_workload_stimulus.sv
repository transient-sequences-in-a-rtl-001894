// tb_workload_stimulus: the two stimulus experiments of the article, run on the
// full design. (1) Start in s_1 with a constant stimulus on node 1; (2) start
// in s_11 with a constant stimulus on node 2. Each run lasts SWITCHES topology
// switches. At every switch the testbench checks that the new state is one of
// the three successors the rewiring rule allows (computed by the reference
// model for each possible active group), that exactly one rewire pulse
// happened and that the state number is valid. It also reports how many of
// the observed transitions are edges of the article's reduced hypernetwork for
// that stimulus. This agreement depends on the stimulus amplitude and noise,
// which the article does not give, so it is printed and not checked.
module tb_workload_stimulus;
  import hn_pkg::*;
  import hn_ref_pkg::*;

  localparam int SWITCHES = 14;
  localparam int MAX_STEPS = 400000;

  logic        clk = 0, rst_n = 0, run = 0, load = 0, noise_en = 0;
  sidx_t       init_state = 5'd1;
  fx_t         x_init [N_NODES], y_init [N_NODES], stim [N_NODES];
  logic [11:0] dac_code [N_NODES+1];
  logic        dac_valid, rewire, step;
  sidx_t       state_idx;
  fx_t         x [N_NODES];
  fx_t         q;

  hypernet_top #(.STEP_CYCLES(2)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // edges s_a -> s_b of the reduced hypernetworks (stimulus on node 1 / node 2)
  localparam int E1 [60] = '{20,23, 23,7, 7,14, 14,9, 9,17, 17,3, 3,23, 8,3, 18,8, 22,8,
                             27,18, 5,27, 10,5, 11,5, 15,10, 21,11, 26,21, 19,22, 6,19, 16,6,
                             25,9, 30,25, 2,30, 13,2, 29,13, 24,14, 4,24, 12,24, 28,12, 1,28};
  localparam int E2 [28] = '{16,24, 24,8, 8,15, 15,10, 10,18, 18,4, 4,24, 9,4, 19,9, 23,9,
                             28,19, 1,28, 11,6, 6,1};

  function automatic bit is_edge(int node, int a, int b);
    if (node == 0) begin
      for (int i = 0; i < 30; i++) if (E1[2*i] == a && E1[2*i+1] == b) return 1;
    end else begin
      for (int i = 0; i < 14; i++) if (E2[2*i] == a && E2[2*i+1] == b) return 1;
    end
    return 0;
  endfunction

  int stim_amp = 335544;   // 0.02
  bit noise_off = 0;
  int n_steps, n_rew;
  int onsets;
  bit was_firing;
  always @(negedge clk) begin
    if (step) n_steps++;
    if (rewire) n_rew++;
    if (dac_valid) begin
      if (x[0] >= 3355443 && !was_firing) onsets++;
      was_firing = x[0] >= 3355443;
    end
  end

  task automatic experiment(int node, int s0);
    int cur, nxt, agree, total, s1, s2, s3, start_steps;
    string path;
    @(negedge clk);
    run = 0;
    for (int i = 0; i < 5; i++) begin
      x_init[i] = R_J; y_init[i] = -39846; stim[i] = (i == node) ? stim_amp : 0;
    end
    // the first group of the initial state has just fired
    begin
      tup_t t;
      tuple_of(s0, t);
      x_init[t[0]] = 8388608; x_init[t[1]] = 8388608;
    end
    init_state = 5'(s0);
    load = 1;
    @(negedge clk);
    load = 0;
    check(int'(state_idx) == s0, "initial state loaded");
    run = 1;
    cur = s0; agree = 0; total = 0; path = $sformatf("s%0d", s0);
    start_steps = n_steps;
    while (total < SWITCHES && n_steps - start_steps < MAX_STEPS) begin
      @(negedge clk);
      if (rewire) begin
        @(negedge clk);  // the new state is registered one clock after the pulse
        nxt = int'(state_idx);
        s1 = successor(cur, 0); s2 = successor(cur, 1); s3 = successor(cur, 2);
        check(nxt == s1 || nxt == s2 || nxt == s3, $sformatf("s%0d -> s%0d is not an allowed transition", cur, nxt));
        if (is_edge(node, cur, nxt)) agree++;
        total++;
        path = {path, $sformatf(" s%0d", nxt)};
        cur = nxt;
      end
    end
    check(total == SWITCHES, $sformatf("%0d switches within the step limit", total));
    $display("stimulus on node %0d from s_%0d: %s", node + 1, s0, path);
    $display("  %0d of %0d transitions are edges of the article's reduced hypernetwork", agree, total);
  endtask

  initial begin
    void'($value$plusargs("STIM=%d", stim_amp));
    if ($test$plusargs("NONOISE")) noise_off = 1;
    for (int i = 0; i < 5; i++) begin x_init[i] = 0; y_init[i] = 0; stim[i] = 0; end
    n_steps = 0; n_rew = 0; onsets = 0; was_firing = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    noise_en = !noise_off;
    experiment(0, 1);
    experiment(1, 11);
    check(n_rew == 2 * SWITCHES, "one rewire pulse per switch");
    check(onsets > 0, "node 1 fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * 2 * MAX_STEPS + 10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
