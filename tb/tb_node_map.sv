// tb_node_map: drives one neuron with random states and inputs and compares each
// map iteration with the integer reference of hn_ref_pkg; also checks that an
// isolated node at rest (x = J, y = F(J)) stays near rest, that load works and
// that the state holds between step strobes.
module tb_node_map;
  import hn_pkg::*;
  import hn_ref_pkg::*;
  logic clk = 0, rst_n = 0, step = 0, load = 0;
  fx_t x_init, y_init, i_in, x, y;
  int checks = 0, failures = 0;

  node_map dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic do_load(int xv, int yv);
    @(negedge clk); x_init = xv; y_init = yv; load = 1;
    @(negedge clk); load = 0;
    check(x == xv && y == yv, "load");
  endtask

  task automatic do_step(int iv);
    int xe, ye;
    node_step(x, y, iv, xe, ye);
    @(negedge clk); i_in = iv; step = 1;
    @(negedge clk); step = 0;
    check(x == xe, $sformatf("x dut=%0d ref=%0d", x, xe));
    check(y == ye, $sformatf("y dut=%0d ref=%0d", y, ye));
    @(negedge clk);
    check(x == xe && y == ye, "holds without strobe");
  endtask

  initial begin
    i_in = 0; x_init = 0; y_init = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random states over the working range, including around D = 0.45
    for (int t = 0; t < 400; t++) begin
      do_load(int'($urandom_range(0, 30000000)) - 12000000, int'($urandom_range(0, 2000000)) - 1000000);
      do_step(int'($urandom_range(0, 4000000)) - 2000000);
    end
    // trajectory with zero input from rest: stays close to x = J
    do_load(R_J, -39846);
    for (int t = 0; t < 200; t++) do_step(0);
    check(x > R_J - 100000 && x < R_J + 100000, "isolated node rests near J");
    // kicked by a strong pulse the node fires (x crosses D)
    begin
      bit fired = 0;
      do_step(3000000);
      for (int t = 0; t < 50; t++) begin do_step(0); if (x >= R_D) fired = 1; end
      check(fired, "a kicked node fires");
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
