// cluster_tracker: which cluster of the current cluster state is active.
//
// In a cluster state <(i1,i2),(i3,i4),i5> the three clusters fire in turn:
// (i1,i2), then (i3,i4), then i5, then again (i1,i2). The rewiring rule needs
// the cluster active at the switching moment and the one active before it.
// The paper gives this function but not how it is measured; here a cluster is
// "firing" when any of its nodes has x >= THETA (the flags from the coupling
// block). The active cluster is held in a register and moves to another cluster
// as soon as one of that cluster's nodes fires; if both other clusters fire,
// the one next in cycle order is taken. The previously active cluster is the
// cycle predecessor of the active one.
//
// Interface: clusters are named by their position 0..2 in the tuple, so a
// rewiring (which swaps nodes, not positions) leaves 'act' valid. 'load'
// makes cluster 0 active. 'act' updates one clock after each 'step' strobe
// from the firing flags of the step that just ended.
module cluster_tracker
  import hn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               step,
  input  logic               load,
  input  logic [N_NODES-1:0] fire,
  input  cstate_t            state,
  output clu_t               act,
  output clu_t               prev
);
  logic [2:0] cfire;
  clu_t nxt1, nxt2;

  always_comb begin
    cfire = '0;
    for (int p = 0; p < N_NODES; p++)
      if (fire[state[p]]) cfire[pos_cluster(p)] = 1'b1;
    nxt1 = (act == 2'd2) ? 2'd0 : act + 2'd1;
    nxt2 = (act == 2'd0) ? 2'd2 : act - 2'd1;
    prev = nxt2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                act <= 2'd0;
    else if (load)             act <= 2'd0;
    else if (step) begin
      if (cfire[nxt1])         act <= nxt1;
      else if (cfire[nxt2])    act <= nxt2;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) act != 2'd3)
    else $error("cluster_tracker: invalid active cluster");
endmodule
