// tb_hypernet_top: end-to-end test of the adaptive five-neuron network.
//
// A reference model (hn_ref_pkg) runs in lockstep with the design: at every
// time-step strobe it advances x, y, noise, q, the active cluster and the
// topology with integer arithmetic and the testbench compares x_1..x_5, q, the
// rewiring strobe, the cluster-state number and the six DAC codes. The run has
// three phases: a free-running (autonomous) phase with noise, a phase with a
// constant stimulus on node 1 and one with a constant stimulus on node 2. It
// counts how often each mechanism happens (steps, firing nodes, inhibition,
// rebound onsets, switching moments, rewirings through each cluster, q
// resets, DAC saturation, noise, stimulus) and counts a failure for any that
// never happens. STEP_CYCLES is shortened so the run is quick.
module tb_hypernet_top;
  import hn_pkg::*;
  import hn_ref_pkg::*;

  localparam int STEPS_AUTO = 200000;
  localparam int STEPS_STIM = 200000;
  localparam int STEP_CYC   = 2;
  localparam int STIM       = 335544;  // 0.02 on the stimulated node

  logic        clk = 0, rst_n = 0, run = 0, load = 0, noise_en = 0;
  sidx_t       init_state = 5'd1;
  fx_t         x_init [N_NODES], y_init [N_NODES], stim [N_NODES];
  logic [11:0] dac_code [N_NODES+1];
  logic        dac_valid, rewire, step;
  sidx_t       state_idx;
  fx_t         x [N_NODES];
  fx_t         q;

  hypernet_top #(.STEP_CYCLES(STEP_CYC)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_steps = 0, n_fire = 0, n_inhib = 0, n_onset = 0, n_rewire = 0, n_noise = 0,
      n_stim = 0, n_sat = 0, n_qreset = 0;
  int n_act [3] = '{0, 0, 0};

  // reference state
  int rx [5], ry [5], rq, ract;
  bit [31:0] rl [5];
  tup_t rt;
  adj_m ra;
  bit exp_rewire;
  bit ref_live = 0;
  int rstim [5];
  bit rnoise;
  bit [4:0] last_fire;

  localparam bit [31:0] SEEDS [5] =
    '{32'hACE1_0001, 32'h1234_5679, 32'h0BAD_F00D, 32'h7EED_BEEF, 32'h5EED_1357};

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t step %0d: %s", $time, n_steps, what);
    end
  endtask

  function automatic int dac_of(int v);
    int s;
    s = (v >>> 13) + 2048;
    return s < 0 ? 0 : s > 4095 ? 4095 : s;
  endfunction

  int dac_prev [6];
  string path = "";

  // compare design with reference, then advance the reference one step
  always @(negedge clk) begin
    if (ref_live && step) begin
      int xn [5], yn [5], ii [5], qn, k, l;
      bit over;
      bit [2:0] cf;
      bit [4:0] fire;
      n_steps++;
      for (int i = 0; i < 5; i++) check(x[i] == rx[i], $sformatf("x%0d dut=%0d ref=%0d", i+1, x[i], rx[i]));
      check(q == rq, $sformatf("q dut=%0d ref=%0d", q, rq));
      check(int'(state_idx) == index_of(rt), $sformatf("state dut=%0d ref=%0d", state_idx, index_of(rt)));
      // DAC codes of this step, visible one clock after the strobe
      for (int c = 0; c < 5; c++) dac_prev[c] = dac_of(rx[c]);
      dac_prev[5] = dac_of(rq);
      // coupling, noise and stimulus
      for (int i = 0; i < 5; i++) begin
        fire[i] = rx[i] >= R_TH;
        ii[i] = coupling(i, rx, ra) + (rnoise ? noise_of(rl[i]) : 0) + rstim[i];
        if (coupling(i, rx, ra) != 0) n_inhib++;
        if (rnoise) n_noise++;
        if (rstim[i] != 0) n_stim++;
        if (fire[i]) n_fire++;
        if (fire[i] && !last_fire[i]) n_onset++;
      end
      last_fire = fire;
      for (int i = 0; i < 5; i++) node_step(rx[i], ry[i], ii[i], xn[i], yn[i]);
      // q and switching moment
      over = rq > R_ONE;
      qn = 0;
      for (int i = 0; i < 5; i++) qn += rx[i];
      qn = (over ? 0 : rq) + mul(R_MU5, qn);
      // firing clusters of the tuple in force during this step
      cf = '0;
      for (int i = 0; i < 5; i++)
        if (fire[i]) for (int c = 0; c < 3; c++) if (in_cluster(rt, c, i)) cf[c] = 1;
      // active group after this step's firing; the rewiring uses it
      if (cf[(ract + 1) % 3]) ract = (ract + 1) % 3;
      else if (cf[(ract + 2) % 3]) ract = (ract + 2) % 3;
      if (over) begin
        n_qreset++;
        n_act[ract]++;
        pick_kl(rt, ract, k, l);
        swap_tuple(rt, k, l);
        adj_of(rt, ra);
        path = {path, $sformatf(" s%0d", index_of(rt))};
      end
      for (int i = 0; i < 5; i++) begin rx[i] = xn[i]; ry[i] = yn[i]; rl[i] = lfsr_next(rl[i]); end
      rq = qn;
      exp_rewire = over;
    end
  end

  // rewire strobe and DAC codes appear one clock after the step strobe
  always @(negedge clk) begin
    if (ref_live && dac_valid) begin
      check(rewire == exp_rewire, "rewire strobe");
      if (rewire) n_rewire++;
      for (int c = 0; c < 6; c++) begin
        check(int'(dac_code[c]) == dac_prev[c], $sformatf("dac ch%0d dut=%0d ref=%0d", c, dac_code[c], dac_prev[c]));
        if (dac_prev[c] == 0 || dac_prev[c] == 4095) n_sat++;
      end
    end
  end

  // stimulus changes just after a clock edge, so design and reference pick it
  // up at the same step
  task automatic set_stim(int node);
    @(posedge clk);
    #1;
    for (int i = 0; i < 5; i++) begin
      stim[i] = (i == node) ? STIM : 0;
      rstim[i] = stim[i];
    end
  endtask

  initial begin
    for (int i = 0; i < 5; i++) begin
      x_init[i] = 0; y_init[i] = 0; stim[i] = 0; rstim[i] = 0;
    end
    // initial condition: first cluster (nodes 1,2 of s_1) fired, others at rest
    x_init[0] = 8388608; x_init[1] = 8388608;
    for (int i = 2; i < 5; i++) x_init[i] = R_J;
    for (int i = 0; i < 5; i++) y_init[i] = -39846;  // F(J) at rest
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load = 1;
    @(negedge clk);
    load = 0;
    for (int i = 0; i < 5; i++) begin rx[i] = x_init[i]; ry[i] = y_init[i]; rl[i] = SEEDS[i]; end
    rq = 0; ract = 0; tuple_of(1, rt); adj_of(rt, ra); last_fire = '0;
    rnoise = 1; noise_en = 1;
    ref_live = 1;
    run = 1;
    wait (n_steps == STEPS_AUTO);
    $display("autonomous phase: %0d rewirings, path s1%s", n_qreset, path);
    path = "";
    set_stim(0);
    wait (n_steps == STEPS_AUTO + STEPS_STIM);
    $display("stimulus on node 1: %0d rewirings, path%s", n_qreset, path);
    path = "";
    set_stim(1);
    wait (n_steps == STEPS_AUTO + 2 * STEPS_STIM);
    @(negedge clk); @(negedge clk); @(negedge clk);
    $display("stimulus on node 2: %0d rewirings, path%s", n_qreset, path);
    $display("mechanisms: steps=%0d firing=%0d onsets=%0d inhibition=%0d switches=%0d rewire_strobes=%0d act0/1/2=%0d/%0d/%0d dac_sat=%0d noise=%0d stim=%0d",
             n_steps, n_fire, n_onset, n_inhib, n_qreset, n_rewire, n_act[0], n_act[1], n_act[2], n_sat, n_noise, n_stim);
    check(n_steps > 0, "time steps happened");
    check(n_fire > 0, "a node fired");
    check(n_onset > 5, "firing onsets (bursts) happened");
    check(n_inhib > 0, "inhibition was active");
    check(n_qreset > 0, "q crossed 1 and the topology switched");
    check(n_rewire == n_qreset, "one rewire strobe per switch");
    for (int c = 0; c < 3; c++) check(n_act[c] > 0, $sformatf("a switch with cluster %0d active", c));
    check(n_noise > 0, "noise was applied");
    check(n_stim > 0, "stimulus was applied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (STEP_CYC * (STEPS_AUTO + 2 * STEPS_STIM) * 2 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
