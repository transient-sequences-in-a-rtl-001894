// hypernet_top: adaptive network of five spiking neurons whose coupling
// topology switches as driven by its own activity.
//
// Five map neurons (node_map) are coupled by inhibitory links (synaptic_coupling)
// arranged as a cluster state <(i1,i2),(i3,i4),i5>; this makes the three
// clusters fire in turn. A slow integrator of the mean field (q_integrator)
// decides when the topology switches. At that moment rewire_select picks node k
// of the active cluster (cluster_tracker) and node l of the previously active
// one, and topology_unit exchanges the two nodes in the adjacency matrix
// (A := T_kl A T_kl). The sequence of cluster states (state_decoder gives
// s_1..s_30) is a walk on a hypernetwork of 30 states. Left alone it wanders
// irregularly. A constant stimulus on one node (stim) makes it settle into a
// fixed path that ends in a 6-cycle. x_1..x_5 and q leave the design as 12-bit
// DAC codes (dac_formatter).
//
// Timing: step_timer gives one strobe per discrete time step (50 us, i.e.
// STEP_CYCLES clocks). On each strobe every state register (x, y, noise, q,
// active cluster) advances at once from the values of step n. When q[n] > 1,
// 'rewire' pulses one clock after the strobe and A, the tuple and state_idx
// take the rewired values one clock after that; the next strobe is thousands
// of clocks away, so the next step already uses the new topology. 'load' (with run low
// or high) sets the initial cluster state, x_init / y_init and q = 0.
// The dynamics, constants, rewiring rule and 12-bit outputs follow the paper;
// the fixed-point format, noise source, activity detection and DAC scaling are
// this design's own choices.
module hypernet_top
  import hn_pkg::*;
#(
  parameter int unsigned STEP_CYCLES = 5000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic        load,
  input  sidx_t       init_state,
  input  fx_t         x_init [N_NODES],
  input  fx_t         y_init [N_NODES],
  input  fx_t         stim   [N_NODES],
  input  logic        noise_en,
  output logic [11:0] dac_code [N_NODES+1],
  output logic        dac_valid,
  output sidx_t       state_idx,
  output logic        rewire,
  output logic        step,
  output fx_t         x [N_NODES],
  output fx_t         q
);
  fx_t                y [N_NODES];
  fx_t                noise_raw [N_NODES];
  fx_t                noise [N_NODES];
  fx_t                i_in [N_NODES];
  logic [N_NODES-1:0] fire;
  adj_t               adj;
  cstate_t            state;
  clu_t               act, prev;
  node_t              k, l;
  logic               sw;

  localparam logic [31:0] SEEDS [N_NODES] =
    '{32'hACE1_0001, 32'h1234_5679, 32'h0BAD_F00D, 32'h7EED_BEEF, 32'h5EED_1357};

  step_timer #(.STEP_CYCLES(STEP_CYCLES)) u_timer (
    .clk, .rst_n, .en(run), .step
  );

  for (genvar i = 0; i < N_NODES; i++) begin : g_node
    noise_lfsr #(.SEED(SEEDS[i])) u_noise (
      .clk, .rst_n, .step, .noise(noise_raw[i])
    );
    assign noise[i] = noise_en ? noise_raw[i] : '0;

    node_map u_node (
      .clk, .rst_n, .step, .load,
      .x_init(x_init[i]), .y_init(y_init[i]), .i_in(i_in[i]),
      .x(x[i]), .y(y[i])
    );
  end

  synaptic_coupling u_coupling (
    .x, .adj, .noise, .stim, .fire, .i_out(i_in)
  );

  q_integrator u_q (
    .clk, .rst_n, .step, .load, .x, .q, .rewire(sw)
  );

  cluster_tracker u_tracker (
    .clk, .rst_n, .step, .load, .fire, .state, .act, .prev
  );

  rewire_select u_select (
    .state, .act, .prev, .k, .l
  );

  topology_unit u_topology (
    .clk, .rst_n, .load, .init_state, .rewire(sw), .k, .l, .adj, .state
  );

  state_decoder u_decoder (
    .state, .idx(state_idx)
  );

  dac_formatter #(.DAC_BITS(12)) u_dac (
    .clk, .rst_n, .step, .x, .q, .code(dac_code), .valid(dac_valid)
  );

  assign rewire = sw;
endmodule
