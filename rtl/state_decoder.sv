// state_decoder: number of the current cluster state, i.e. the node of the
// hypernetwork the network occupies.
//
// Two tuples are the same state when their single-node clusters agree and their
// first pairs hold the same two nodes (order inside a pair does not matter;
// the order of the clusters does, so <(1,2),(3,4),5> = s_1 differs from
// <(3,4),(1,2),5> = s_26). The decoder compares the tuple with all 30 entries
// of the table of cluster states in parallel.
//
// Interface: combinational; idx is 1..30, or 0 if the tuple is not a valid
// cluster state.
module state_decoder
  import hn_pkg::*;
(
  input  cstate_t state,
  output sidx_t   idx
);
  always_comb begin
    idx = '0;
    for (int s = 1; s <= N_STATES; s++) begin
      cstate_t t;
      t = table_state(s);
      if (t[4] == state[4] &&
          ((t[0] == state[0] && t[1] == state[1]) || (t[0] == state[1] && t[1] == state[0])))
        idx = sidx_t'(s);
    end
  end
endmodule
