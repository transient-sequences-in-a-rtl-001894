// node_map: one map-based spiking neuron (Courbage-Nekorkin map).
//
//   x[n+1] = x[n] + F(x[n]) - y[n] + I[n]
//   y[n+1] = y[n] + EPS * (x[n] - J)
//   F(x)   = x (x - A) (1 - x) - BETA * H(x - D),   H(u) = 1 for u >= 0
//
// x is the fast (membrane-like) variable, y the slow recovery variable and I
// the total input from the coupling, noise and stimulus. With the default
// constants an isolated node rests below threshold; released from inhibition it
// fires a chaotic burst (post-inhibitory rebound).
//
// Interface: on 'load' the state takes x_init / y_init; on 'step' it advances
// one map iteration using the i_in present in that cycle. x and y are
// registered outputs, so they change one clock after the strobe. The
// arithmetic is combinational between strobes (three multipliers).
// The equations and constants follow the paper (the FPGA constants of its
// experimental section); the fixed-point format and truncating products are
// this design's choice.
module node_map
  import hn_pkg::*;
#(
  parameter real A    = 0.1,
  parameter real BETA = 0.3,
  parameter real D    = 0.45,
  parameter real EPS  = 0.001,
  parameter real J    = 0.05
) (
  input  logic clk,
  input  logic rst_n,
  input  logic step,
  input  logic load,
  input  fx_t  x_init,
  input  fx_t  y_init,
  input  fx_t  i_in,
  output fx_t  x,
  output fx_t  y
);
  localparam fx_t A_FX    = to_fx(A);
  localparam fx_t BETA_FX = to_fx(BETA);
  localparam fx_t D_FX    = to_fx(D);
  localparam fx_t EPS_FX  = to_fx(EPS);
  localparam fx_t J_FX    = to_fx(J);

  fx_t cubic, f_h, x_next, y_next;

  always_comb begin
    cubic  = fx_mul(fx_mul(x, x - A_FX), FX_ONE - x);
    f_h    = cubic - ((x >= D_FX) ? BETA_FX : '0);
    x_next = x + f_h - y + i_in;
    y_next = y + fx_mul(EPS_FX, x - J_FX);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0;
      y <= '0;
    end else if (load) begin
      x <= x_init;
      y <= y_init;
    end else if (step) begin
      x <= x_next;
      y <= y_next;
    end
  end
endmodule
