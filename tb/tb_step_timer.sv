// tb_step_timer: checks that the step strobe is one clock wide, comes exactly
// every STEP_CYCLES clocks (shortened to 7 here), that the first one comes
// STEP_CYCLES clocks after enable, and that disabling stops it.
module tb_step_timer;
  localparam int P = 7;
  logic clk = 0, rst_n = 0, en = 0, step;
  int checks = 0, failures = 0;

  step_timer #(.STEP_CYCLES(P)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0, last = -1, n = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    en = 1;
    begin
      int start;
      start = cyc;
      for (int s = 0; s < 20; s++) begin
        do @(negedge clk); while (!step);
        if (s == 0) check(cyc - start == P, $sformatf("first strobe after %0d clocks", cyc - start));
        else check(cyc - last == P, $sformatf("period %0d", cyc - last));
        last = cyc;
        @(negedge clk);
        check(!step, "strobe lasts one clock");
      end
    end
    en = 0;
    repeat (3 * P) begin
      @(negedge clk);
      check(!step, "no strobe while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
