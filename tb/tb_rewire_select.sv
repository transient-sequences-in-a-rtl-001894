// tb_rewire_select: checks the choice of k and l for all 30 states and all
// three active clusters against the reference rule, then checks that the
// transitions the paper reports are reachable: each reported step s_a -> s_b
// must be the result of the rule for one of the three active clusters.
// Sources: the stimulus paths quoted in the text and the edges of the reduced
// hypernetwork for a stimulus on node 1 (untangled drawing).
module tb_rewire_select;
  import hn_pkg::*;
  import hn_ref_pkg::*;
  cstate_t state;
  clu_t act, prev;
  node_t k, l;
  int checks = 0, failures = 0;

  rewire_select dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask


  task automatic dut_succ(input int a, input int c, output int b);
    tup_t t;
    tuple_of(a, t);
    for (int p = 0; p < 5; p++) state[p] = 3'(t[p]);
    act = 2'(c);
    prev = 2'((c + 2) % 3);
    #1;
    swap_tuple(t, int'(k), int'(l));
    b = index_of(t);
  endtask

  task automatic edge_ok(int a, int b);
    int s;
    bit found;
    found = 0;
    for (int c = 0; c < 3; c++) begin
      dut_succ(a, c, s);
      if (s == b) found = 1;
    end
    check(found, $sformatf("transition s%0d -> s%0d", a, b));
  endtask

  // s_a -> s_b pairs
  localparam int PATH1 [11] = '{1, 28, 12, 24, 14, 9, 17, 3, 23, 7, 14};   // stimulus on node 1
  localparam int PATH2 [13] = '{11, 6, 1, 28, 19, 9, 4, 24, 8, 15, 10, 18, 4};  // stimulus on node 2
  localparam int FIG_A [30] = '{20,23, 23,7, 7,14, 14,9, 9,17, 17,3, 3,23, 8,3, 18,8, 22,8,
                                 27,18, 5,27, 10,5, 11,5, 15,10};
  localparam int FIG_B [30] = '{21,11, 26,21, 19,22, 6,19, 16,6, 25,9, 30,25, 2,30, 13,2, 29,13,
                                 24,14, 4,24, 12,24, 28,12, 1,28};

  initial begin
    // exhaustive comparison with the reference rule
    for (int s = 1; s <= 30; s++)
      for (int c = 0; c < 3; c++) begin
        tup_t t;
        int rk, rl;
        tuple_of(s, t);
        pick_kl(t, c, rk, rl);
        for (int p = 0; p < 5; p++) state[p] = 3'(t[p]);
        act = 2'(c);
        prev = 2'((c + 2) % 3);
        #1;
        check(int'(k) == rk && int'(l) == rl, $sformatf("s%0d act %0d: dut k=%0d l=%0d ref k=%0d l=%0d", s, c, k, l, rk, rl));
      end
    // the example of the text: clockwise distance 2->3 is 1, 3->2 is 4
    check(cw_dist(3'd1, 3'd2) == 1 && cw_dist(3'd2, 3'd1) == 4, "clockwise distance");
    for (int i = 0; i < 10; i++) edge_ok(PATH1[i], PATH1[i+1]);
    for (int i = 0; i < 12; i++) edge_ok(PATH2[i], PATH2[i+1]);
    for (int i = 0; i < 15; i++) edge_ok(FIG_A[2*i], FIG_A[2*i+1]);
    for (int i = 0; i < 15; i++) edge_ok(FIG_B[2*i], FIG_B[2*i+1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
