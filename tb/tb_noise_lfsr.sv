// tb_noise_lfsr: compares the noise samples with a reference LFSR over many
// steps, checks they hold between strobes, stay within +-2^-12 and have a mean
// near zero.
module tb_noise_lfsr;
  import hn_pkg::*;
  import hn_ref_pkg::*;
  logic clk = 0, rst_n = 0, step = 0;
  fx_t noise;
  int checks = 0, failures = 0;

  noise_lfsr #(.SEED(32'hACE1_0001)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    bit [31:0] s;
    longint sum;
    s = 32'hACE1_0001;
    sum = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      check(noise == noise_of(s), $sformatf("sample %0d dut=%0d ref=%0d", t, noise, noise_of(s)));
      check(noise >= -4096 && noise < 4096, "amplitude");
      sum += noise;
      step = (t % 2 == 0);
      if (step) s = lfsr_next(s);
    end
    check(sum / 5000 > -400 && sum / 5000 < 400, "mean near zero");
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
