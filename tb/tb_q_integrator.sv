// tb_q_integrator: feeds random node values (biased positive so q climbs) and
// compares q with the reference q[n+1] = (q[n] > 1 ? 0 : q[n]) + (MU/5) sum x;
// checks that 'rewire' pulses for exactly one clock after each step with
// q[n] > 1 and at no other time, that q holds between strobes, and that load
// clears q.
module tb_q_integrator;
  import hn_pkg::*;
  import hn_ref_pkg::*;
  logic clk = 0, rst_n = 0, step = 0, load = 0;
  fx_t x [N_NODES];
  fx_t q;
  logic rewire;
  int checks = 0, failures = 0, n_sw = 0;

  q_integrator dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int rq, sum;
    bit over;
    for (int i = 0; i < 5; i++) x[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load = 1; @(negedge clk); load = 0;
    rq = 0;
    check(q == 0 && !rewire, "load clears q");
    for (int t = 0; t < 30000; t++) begin
      sum = 0;
      for (int i = 0; i < 5; i++) begin
        x[i] = int'($urandom_range(0, 16000000)) - 4000000;
        sum += x[i];
      end
      over = rq > R_ONE;
      rq = (over ? 0 : rq) + mul(R_MU5, sum);
      step = 1;
      @(negedge clk);
      step = 0;
      check(q == rq, $sformatf("q dut=%0d ref=%0d", q, rq));
      check(rewire == over, "rewire strobe");
      if (rewire) n_sw++;
      @(negedge clk);
      check(!rewire, "rewire is one clock wide");
      check(q == rq, "q holds between strobes");
    end
    check(n_sw > 5, $sformatf("q crossed 1 several times (%0d)", n_sw));
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
