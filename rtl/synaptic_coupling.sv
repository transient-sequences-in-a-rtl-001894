// synaptic_coupling: total input I_i of every node for the current step.
//
//   I_i = -G * (x_i - NU) * sum_{j != i} a_ij * H(x_j - THETA)  + noise_i + stim_i
//
// A node j is "firing" when x_j >= THETA; every firing node that sends a link
// to node i (a_ij = 1) adds one unit of inhibition, whose strength scales with
// the distance of x_i from the reversal level NU. Because (x_i - NU) does not
// depend on j, the sum is evaluated as G*(x_i - NU) times the number of firing
// presynaptic nodes (0..4), one multiplier per node. The self-term a_ii is
// excluded as in the paper's sum.
//
// Interface: purely combinational, from x, adj, noise and stim to i_out and
// the firing flags 'fire'. The coupling law and constants follow the paper's
// FPGA settings (G = 0.07; the paper's simulations use 0.15). The noise and
// stimulus are added here because the paper folds both into I_i; their sizes
// come from outside.
module synaptic_coupling
  import hn_pkg::*;
#(
  parameter real G     = 0.07,
  parameter real NU    = -0.5,
  parameter real THETA = 0.2
) (
  input  fx_t                x     [N_NODES],
  input  adj_t               adj,
  input  fx_t                noise [N_NODES],
  input  fx_t                stim  [N_NODES],
  output logic [N_NODES-1:0] fire,
  output fx_t                i_out [N_NODES]
);
  localparam fx_t G_FX     = to_fx(G);
  localparam fx_t NU_FX    = to_fx(NU);
  localparam fx_t THETA_FX = to_fx(THETA);

  always_comb begin
    for (int j = 0; j < N_NODES; j++) fire[j] = (x[j] >= THETA_FX);
  end

  always_comb begin
    for (int i = 0; i < N_NODES; i++) begin
      logic [2:0] cnt;
      fx_t        unit;
      cnt = '0;
      for (int j = 0; j < N_NODES; j++)
        if (j != i && adj[i][j] && fire[j]) cnt = cnt + 3'd1;
      unit     = fx_mul(G_FX, x[i] - NU_FX);
      i_out[i] = noise[i] + stim[i] - fx_t'(unit * $signed({1'b0, cnt}));
    end
  end
endmodule
