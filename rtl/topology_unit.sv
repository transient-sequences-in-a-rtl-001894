// topology_unit: the coupling topology A and the cluster state it encodes.
//
// The inhibitory links form the pattern <(i1,i2),(i3,i4),i5>: i5 inhibits i1
// and i2, those inhibit i3 and i4, and those inhibit i5, so the three clusters
// fire in turn. On 'load' the unit takes state number init_state (1..30) from
// the table of cluster states and builds A from it. On 'rewire' it applies
//
//   A := T_kl A T_kl
//
// where T_kl is the identity with rows k and l exchanged: rows k and l of A
// are swapped and then columns k and l. The tuple is kept beside A and has
// nodes k and l exchanged by the same strobe, which keeps it equal to the
// state A encodes (an assertion checks this every cycle).
//
// Interface: adj[i][j] = a_ij; state is the tuple with nodes 0..4. Both are
// registered and change one clock after load / rewire. An init_state outside
// 1..30 loads s_1 (this design's choice).
module topology_unit
  import hn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    load,
  input  sidx_t   init_state,
  input  logic    rewire,
  input  node_t   k,
  input  node_t   l,
  output adj_t    adj,
  output cstate_t state
);
  function automatic node_t swap_kl(node_t n, node_t kk, node_t ll);
    return (n == kk) ? ll : (n == ll) ? kk : n;
  endfunction

  cstate_t init_tuple, state_sw;
  adj_t    adj_sw;

  always_comb begin
    init_tuple = (init_state >= 5'd1 && init_state <= 5'(N_STATES))
               ? table_state(int'(init_state)) : table_state(1);
    for (int r = 0; r < N_NODES; r++)
      for (int c = 0; c < N_NODES; c++)
        adj_sw[r][c] = adj[swap_kl(node_t'(r), k, l)][swap_kl(node_t'(c), k, l)];
    for (int p = 0; p < N_NODES; p++) state_sw[p] = swap_kl(state[p], k, l);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= table_state(1);
      adj   <= state_adj(table_state(1));
    end else if (load) begin
      state <= init_tuple;
      adj   <= state_adj(init_tuple);
    end else if (rewire) begin
      state <= state_sw;
      adj   <= adj_sw;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) adj == state_adj(state))
    else $error("topology_unit: adjacency matrix does not match cluster state");
endmodule
