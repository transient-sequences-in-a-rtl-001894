// tb_topology_unit: loads every state of the table and checks the adjacency
// matrix against the reference built from its own table copy; then applies
// random rewirings (k, l) and checks the result against T_kl A T_kl computed
// by explicit matrix products with the permutation matrix, and the tuple
// against the reference swap.
module tb_topology_unit;
  import hn_pkg::*;
  import hn_ref_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, rewire = 0;
  sidx_t init_state;
  node_t k, l;
  adj_t adj;
  cstate_t state;
  int checks = 0, failures = 0;

  topology_unit dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  adj_m ra;
  tup_t rt;

  task automatic compare(string what);
    bit ok;
    ok = 1;
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) if (adj[i][j] != ra[i][j]) ok = 0;
    check(ok, {what, ": adjacency"});
    ok = 1;
    for (int p = 0; p < 5; p++) if (int'(state[p]) != rt[p]) ok = 0;
    check(ok, {what, ": tuple"});
  endtask

  // T A T with T the identity with rows kk and ll exchanged
  function automatic adj_m tat(adj_m a, int kk, int ll);
    int t [5][5], m [5][5];
    adj_m r;
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) t[i][j] = (i == j) ? 1 : 0;
    t[kk][kk] = 0; t[ll][ll] = 0; t[kk][ll] = 1; t[ll][kk] = 1;
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) begin
      m[i][j] = 0;
      for (int x = 0; x < 5; x++) m[i][j] += t[i][x] * int'(a[x][j]);
    end
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) begin
      int v;
      v = 0;
      for (int x = 0; x < 5; x++) v += m[i][x] * t[x][j];
      r[i][j] = (v != 0);
    end
    return r;
  endfunction

  initial begin
    k = 0; l = 0; init_state = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 1; s <= 30; s++) begin
      @(negedge clk); init_state = 5'(s); load = 1;
      @(negedge clk); load = 0;
      tuple_of(s, rt); adj_of(rt, ra);
      compare($sformatf("load s%0d", s));
    end
    // out-of-range state number loads s_1
    @(negedge clk); init_state = 5'd0; load = 1;
    @(negedge clk); load = 0;
    tuple_of(1, rt); adj_of(rt, ra);
    compare("load 0");
    // example from the text: s_1 with k = 2, l = 5 gives s_28
    @(negedge clk); k = 3'd1; l = 3'd4; rewire = 1;
    @(negedge clk); rewire = 0;
    ra = tat(ra, 1, 4); swap_tuple(rt, 1, 4);
    compare("s1 swap 2,5");
    check(index_of(rt) == 28, "s1 -> s28");
    for (int n = 0; n < 500; n++) begin
      int kk, ll;
      kk = $urandom_range(0, 4);
      ll = $urandom_range(0, 4);
      @(negedge clk); k = 3'(kk); l = 3'(ll); rewire = 1;
      @(negedge clk); rewire = 0;
      ra = tat(ra, kk, ll); swap_tuple(rt, kk, ll);
      compare($sformatf("rewire %0d %0d", kk, ll));
      @(negedge clk);
      compare("holds");
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
