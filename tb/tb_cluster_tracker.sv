// tb_cluster_tracker: for random cluster states and firing patterns, compares
// the active and previous cluster with a reference that looks up membership in
// its own copy of the table of cluster states; includes the regular sequence
// (first, second, third cluster in turn) and the load behaviour.
module tb_cluster_tracker;
  import hn_pkg::*;
  import hn_ref_pkg::*;
  logic clk = 0, rst_n = 0, step = 0, load = 0;
  logic [N_NODES-1:0] fire;
  cstate_t state;
  clu_t act, prev;
  int checks = 0, failures = 0;

  cluster_tracker dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int ract;
  tup_t t;

  task automatic set_state(int sidx);
    tuple_of(sidx, t);
    for (int p = 0; p < 5; p++) state[p] = 3'(t[p]);
  endtask

  task automatic do_step(bit [4:0] f);
    bit [2:0] cf;
    cf = '0;
    for (int i = 0; i < 5; i++) if (f[i]) for (int c = 0; c < 3; c++) if (in_cluster(t, c, i)) cf[c] = 1;
    if (cf[(ract + 1) % 3]) ract = (ract + 1) % 3;
    else if (cf[(ract + 2) % 3]) ract = (ract + 2) % 3;
    fire = f; step = 1;
    @(negedge clk); step = 0;
    check(int'(act) == ract, $sformatf("act dut=%0d ref=%0d", act, ract));
    check(int'(prev) == (ract + 2) % 3, "prev is the cycle predecessor");
  endtask

  initial begin
    fire = '0;
    set_state(1);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load = 1; @(negedge clk); load = 0;
    ract = 0;
    check(act == 0, "load makes cluster 0 active");
    // s_1: (1,2) -> (3,4) -> 5 -> (1,2)
    do_step(5'b00100); check(act == 1, "nodes 3,4 take over");
    do_step(5'b01100); check(act == 1, "holds while the same cluster fires");
    do_step(5'b10000); check(act == 2, "node 5 takes over");
    do_step(5'b00000); check(act == 2, "holds while silent");
    do_step(5'b00011); check(act == 0, "nodes 1,2 take over");
    for (int n = 0; n < 3000; n++) begin
      if (n % 50 == 0) set_state(int'($urandom_range(1, 30)));
      do_step(5'($urandom_range(0, 31)));
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
