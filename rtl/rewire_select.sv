// rewire_select: picks the two nodes k and l whose exchange rewires the network.
//
// At a switching moment the active cluster (act) and the previously active one
// (prev) are known. Among all pairs with k in the active cluster and l in the
// previous one, the pair with the smallest clockwise index distance from k to
// l, (l - k) mod 5, is chosen (from node 2 to node 3 the distance is 1, from 3
// to 2 it is 4). Equal distances are resolved by going clockwise from the first
// node of the third, idle cluster: the k met first wins. The rule follows the
// paper; the tie-break is this design's reading of its "clockwise ordered set
// starting from i5", and reproduces the paper's reported transitions.
//
// Interface: combinational; k and l are node numbers 0..4.
module rewire_select
  import hn_pkg::*;
(
  input  cstate_t state,
  input  clu_t    act,
  input  clu_t    prev,
  output node_t   k,
  output node_t   l
);
  clu_t       other;
  node_t      start;
  logic [5:0] best, key;

  always_comb begin
    key   = '0;
    other = 2'd3 - act - prev;
    start = (other == 2'd0) ? state[0] : (other == 2'd1) ? state[2] : state[4];
    best  = '1;
    k     = state[0];
    l     = state[0];
    for (int pk = 0; pk < N_NODES; pk++) begin
      for (int pl = 0; pl < N_NODES; pl++) begin
        if (pos_cluster(pk) == act && pos_cluster(pl) == prev) begin
          key = {cw_dist(state[pk], state[pl]), cw_dist(start, state[pk])};
          if (key < best) begin
            best = key;
            k    = state[pk];
            l    = state[pl];
          end
        end
      end
    end
  end
endmodule
