// hn_pkg: types, constants and tables shared by the adaptive spiking-network core.
//
// The core integrates five map-based neurons in discrete time. Every real-valued
// quantity (x, y, q, the input I and all model constants) is held as a signed
// two's-complement fixed-point number of W bits with FRAC fraction bits
// (Q7.24 by default). The fixed-point format is this design's own choice; the
// model equations and constants follow the paper.
//
// A cluster state <(i1,i2),(i3,i4),i5> is kept as five node numbers (0..4):
// n[0],n[1] form the first cluster, n[2],n[3] the second and n[4] the third.
// STATE_TABLE lists the 30 cluster states s_1..s_30 with nodes numbered 1..5,
// entry by entry as the paper's table of cluster states prints them.
package hn_pkg;

  localparam int N_NODES = 5;    // nodes of the network
  localparam int N_STATES = 30;  // distinct 3-cluster states
  localparam int W    = 32;      // fixed-point word width
  localparam int FRAC = 24;      // fraction bits

  typedef logic signed [W-1:0] fx_t;
  typedef logic [2:0] node_t;    // node number 0..4
  typedef logic [1:0] clu_t;     // cluster position 0..2 inside a state
  typedef logic [4:0] sidx_t;    // state number 1..30 (0 = none)

  // Table of cluster states <(i1,i2),(i3,i4),i5>, nodes numbered 1..5.
  localparam logic [2:0] STATE_TABLE [1:N_STATES][N_NODES] = '{
    '{3'd1, 3'd2, 3'd3, 3'd4, 3'd5},  // s_1
    '{3'd2, 3'd3, 3'd4, 3'd5, 3'd1},  // s_2
    '{3'd3, 3'd4, 3'd5, 3'd1, 3'd2},  // s_3
    '{3'd4, 3'd5, 3'd1, 3'd2, 3'd3},  // s_4
    '{3'd5, 3'd1, 3'd2, 3'd3, 3'd4},  // s_5
    '{3'd1, 3'd3, 3'd2, 3'd4, 3'd5},  // s_6
    '{3'd2, 3'd4, 3'd3, 3'd5, 3'd1},  // s_7
    '{3'd3, 3'd5, 3'd4, 3'd1, 3'd2},  // s_8
    '{3'd4, 3'd1, 3'd5, 3'd2, 3'd3},  // s_9
    '{3'd5, 3'd2, 3'd3, 3'd1, 3'd4},  // s_10
    '{3'd1, 3'd4, 3'd2, 3'd3, 3'd5},  // s_11
    '{3'd2, 3'd5, 3'd3, 3'd4, 3'd1},  // s_12
    '{3'd3, 3'd1, 3'd4, 3'd5, 3'd2},  // s_13
    '{3'd4, 3'd2, 3'd5, 3'd1, 3'd3},  // s_14
    '{3'd5, 3'd3, 3'd1, 3'd2, 3'd4},  // s_15
    '{3'd2, 3'd3, 3'd1, 3'd4, 3'd5},  // s_16
    '{3'd3, 3'd4, 3'd2, 3'd5, 3'd1},  // s_17
    '{3'd4, 3'd5, 3'd3, 3'd1, 3'd2},  // s_18
    '{3'd5, 3'd1, 3'd4, 3'd2, 3'd3},  // s_19
    '{3'd1, 3'd2, 3'd5, 3'd3, 3'd4},  // s_20
    '{3'd2, 3'd4, 3'd1, 3'd3, 3'd5},  // s_21
    '{3'd3, 3'd5, 3'd2, 3'd4, 3'd1},  // s_22
    '{3'd4, 3'd1, 3'd3, 3'd5, 3'd2},  // s_23
    '{3'd5, 3'd2, 3'd4, 3'd1, 3'd3},  // s_24
    '{3'd3, 3'd1, 3'd5, 3'd2, 3'd4},  // s_25
    '{3'd3, 3'd4, 3'd1, 3'd2, 3'd5},  // s_26
    '{3'd4, 3'd5, 3'd2, 3'd3, 3'd1},  // s_27
    '{3'd5, 3'd1, 3'd3, 3'd4, 3'd2},  // s_28
    '{3'd1, 3'd2, 3'd4, 3'd5, 3'd3},  // s_29
    '{3'd2, 3'd3, 3'd5, 3'd1, 3'd4}   // s_30
  };

  // Cluster-state tuple: n[0],n[1] | n[2],n[3] | n[4]
  typedef logic [N_NODES-1:0][2:0] cstate_t;
  // Adjacency matrix: adj[i][j] = a_ij = 1 when node j sends a link to node i
  typedef logic [N_NODES-1:0][N_NODES-1:0] adj_t;

  // Cluster (0..2) that tuple position p (0..4) belongs to.
  function automatic clu_t pos_cluster(int p);
    return (p < 2) ? 2'd0 : (p < 4) ? 2'd1 : 2'd2;
  endfunction

  // Adjacency matrix of a cluster state <(i1,i2),(i3,i4),i5>:
  // i5 inhibits i1,i2; i1,i2 inhibit i3,i4; i3,i4 inhibit i5.
  function automatic adj_t state_adj(cstate_t s);
    adj_t a;
    a = '0;
    a[s[0]][s[4]] = 1'b1;  a[s[1]][s[4]] = 1'b1;
    a[s[2]][s[0]] = 1'b1;  a[s[2]][s[1]] = 1'b1;
    a[s[3]][s[0]] = 1'b1;  a[s[3]][s[1]] = 1'b1;
    a[s[4]][s[2]] = 1'b1;  a[s[4]][s[3]] = 1'b1;
    return a;
  endfunction

  // Table entry (1..30) as a tuple with nodes 0..4.
  function automatic cstate_t table_state(int idx);
    cstate_t s;
    for (int p = 0; p < N_NODES; p++) s[p] = STATE_TABLE[idx][p] - 3'd1;
    return s;
  endfunction

  localparam fx_t FX_ONE = fx_t'(64'sd1 <<< FRAC);

  // Real constant to fixed point, rounded to nearest.
  function automatic fx_t to_fx(real r);
    real s;
    s = r * (2.0 ** FRAC);
    return fx_t'($rtoi(s >= 0.0 ? s + 0.5 : s - 0.5));
  endfunction

  // Fixed-point product, truncated toward minus infinity.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FRAC);
  endfunction

  // (b - a) mod 5 : clockwise index distance from node a to node b.
  function automatic logic [2:0] cw_dist(node_t a, node_t b);
    return (b >= a) ? 3'(b - a) : 3'(b + 3'd5 - a);
  endfunction


endpackage
