// tb_state_decoder: every state of the table, written with its pairs in both
// orders, must decode to its number; tuples that are not cluster states (a
// node repeated) must decode to 0.
module tb_state_decoder;
  import hn_pkg::*;
  import hn_ref_pkg::*;
  cstate_t state;
  sidx_t idx;
  int checks = 0, failures = 0;

  state_decoder dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int s = 1; s <= 30; s++) begin
      tup_t t;
      tuple_of(s, t);
      for (int v = 0; v < 4; v++) begin
        state[0] = 3'(v[0] ? t[1] : t[0]);
        state[1] = 3'(v[0] ? t[0] : t[1]);
        state[2] = 3'(v[1] ? t[3] : t[2]);
        state[3] = 3'(v[1] ? t[2] : t[3]);
        state[4] = 3'(t[4]);
        #1;
        check(int'(idx) == s, $sformatf("s%0d variant %0d decoded as %0d", s, v, idx));
      end
    end
    state[0] = 0; state[1] = 0; state[2] = 1; state[3] = 2; state[4] = 3;
    #1;
    check(idx == 0, "invalid tuple");
    state[0] = 0; state[1] = 1; state[2] = 2; state[3] = 3; state[4] = 1;
    #1;
    check(idx == 0, "invalid tuple with repeated single node");
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
