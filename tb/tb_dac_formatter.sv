// tb_dac_formatter: random values (some far outside [-1, 1)) for the five x
// channels and q; checks the 12-bit codes against floor((v + 1) * 2048) with
// saturation, the valid pulse one clock after the strobe and that codes hold
// between strobes.
module tb_dac_formatter;
  import hn_pkg::*;
  logic clk = 0, rst_n = 0, step = 0;
  fx_t x [N_NODES];
  fx_t q;
  logic [11:0] code [N_NODES+1];
  logic valid;
  int checks = 0, failures = 0;

  dac_formatter dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic int expect_code(int v);
    real r;
    int c;
    r = (real'(v) / 16777216.0 + 1.0) * 2048.0;
    c = $rtoi(r);
    if (r < 0.0 && real'(c) != r) c = c - 1;  // floor
    return c < 0 ? 0 : c > 4095 ? 4095 : c;
  endfunction

  initial begin
    int e [6];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int c = 0; c < 5; c++) begin
        x[c] = (t % 4 == 0) ? int'($urandom) : int'($urandom_range(0, 40000000)) - 20000000;
        e[c] = expect_code(x[c]);
      end
      q = int'($urandom_range(0, 40000000)) - 20000000;
      e[5] = expect_code(q);
      step = 1;
      @(negedge clk);
      step = 0;
      check(valid, "valid follows the strobe");
      for (int c = 0; c < 6; c++) check(int'(code[c]) == e[c], $sformatf("ch%0d code %0d expected %0d", c, code[c], e[c]));
      for (int c = 0; c < 5; c++) x[c] = 0;
      @(negedge clk);
      check(!valid, "valid is one clock wide");
      check(int'(code[0]) == e[0], "code holds between strobes");
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
