// tb_synaptic_coupling: random node values (many near the threshold THETA),
// random adjacency matrices with self-links, noise and stimulus; compares the
// firing flags and every I_i with the reference sum of hn_ref_pkg.
module tb_synaptic_coupling;
  import hn_pkg::*;
  import hn_ref_pkg::*;
  fx_t x [N_NODES], noise [N_NODES], stim [N_NODES], i_out [N_NODES];
  adj_t adj;
  logic [N_NODES-1:0] fire;
  int checks = 0, failures = 0;

  synaptic_coupling dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int rx [5];
      adj_m ra;
      for (int i = 0; i < 5; i++) begin
        case ($urandom_range(0, 2))
          0: rx[i] = R_TH + int'($urandom_range(0, 4)) - 2;
          1: rx[i] = int'($urandom_range(0, 20000000)) - 8000000;
          default: rx[i] = R_NU + int'($urandom_range(0, 100));
        endcase
        x[i] = rx[i];
        noise[i] = int'($urandom_range(0, 8191)) - 4096;
        stim[i] = (t % 3 == 0) ? int'($urandom_range(0, 1000000)) : 0;
        for (int j = 0; j < 5; j++) begin
          ra[i][j] = $urandom_range(0, 1);
          adj[i][j] = ra[i][j];
        end
      end
      #1;
      for (int i = 0; i < 5; i++) begin
        check(fire[i] == (rx[i] >= R_TH), $sformatf("fire %0d", i));
        check(i_out[i] == coupling(i, rx, ra) + noise[i] + stim[i],
              $sformatf("I%0d dut=%0d ref=%0d", i, i_out[i], coupling(i, rx, ra) + noise[i] + stim[i]));
      end
    end
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
