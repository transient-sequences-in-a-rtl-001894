// q_integrator: slow clock of the topology switching.
//
//   q[n+1] = q[n] + MU * X[n],  X[n] = (1/5) sum_i x_i[n]
//   if q[n] > 1 then q[n] := 0 and the network rewires at n* = n
//
// q rises on average because the mean field X is positive on average; its
// slope follows the network activity, so the switching moments inherit the
// irregularity of the neurons. MU*X is formed as (MU/5) times the sum of the
// five x_i, one multiplier. When q[n] exceeds 1 it is reset before the update,
// so q[n+1] = MU*X[n], and 'rewire' pulses for one clock together with that
// step.
//
// Interface: 'load' clears q; 'step' advances it. 'rewire' is registered and
// high in the cycle after the step strobe in which q[n] > 1 was seen, i.e. at
// the same time the new x, y become visible. Law and MU follow the paper; the
// reading of the reset order is this design's.
module q_integrator
  import hn_pkg::*;
#(
  parameter real MU = 0.001
) (
  input  logic clk,
  input  logic rst_n,
  input  logic step,
  input  logic load,
  input  fx_t  x [N_NODES],
  output fx_t  q,
  output logic rewire
);
  localparam fx_t MU5_FX = to_fx(MU / 5.0);

  fx_t sum_x, mu_x;
  logic over;

  always_comb begin
    sum_x = '0;
    for (int i = 0; i < N_NODES; i++) sum_x = sum_x + x[i];
    mu_x = fx_mul(MU5_FX, sum_x);
    over = (q > FX_ONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q      <= '0;
      rewire <= 1'b0;
    end else if (load) begin
      q      <= '0;
      rewire <= 1'b0;
    end else if (step) begin
      q      <= (over ? fx_t'(0) : q) + mu_x;
      rewire <= over;
    end else begin
      rewire <= 1'b0;
    end
  end
endmodule
