// hn_ref_pkg: reference model of the adaptive five-neuron network for the
// testbenches, written independently of the RTL with plain integer arithmetic.
// Values are fixed-point integers with 24 fraction bits (the RTL's format);
// the constants are the paper's FPGA settings rounded to that grid.
// It also holds its own copy of the table of cluster states, as strings
// "i1 i2 i3 i4 i5" of node numbers 1..5, and the rewiring rule written as a
// search over distances rather than over pairs.
package hn_ref_pkg;

  localparam int R_A    = 1677722;   // 0.1
  localparam int R_BETA = 5033165;   // 0.3
  localparam int R_D    = 7549747;   // 0.45
  localparam int R_EPS  = 16777;     // 0.001
  localparam int R_J    = 838861;    // 0.05
  localparam int R_G    = 1174405;   // 0.07
  localparam int R_NU   = -8388608;  // -0.5
  localparam int R_TH   = 3355443;   // 0.2
  localparam int R_MU5  = 3355;      // 0.001 / 5
  localparam int R_ONE  = 16777216;  // 1.0

  // Table of cluster states s_1..s_30: digits i1 i2 i3 i4 i5.
  localparam string TABLE [30] = '{
    "12345", "23451", "34512", "45123", "51234",
    "13245", "24351", "35412", "41523", "52314",
    "14235", "25341", "31452", "42513", "53124",
    "23145", "34251", "45312", "51423", "12534",
    "24135", "35241", "41352", "52413", "31524",
    "34125", "45231", "51342", "12453", "23514"};

  function automatic int mul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 24);
  endfunction

  function automatic void node_step(input int x, input int y, input int i_in,
                                    output int xn, output int yn);
    int f;
    f  = mul(mul(x, x - R_A), R_ONE - x);
    if (x >= R_D) f = f - R_BETA;
    xn = x + f - y + i_in;
    yn = y + mul(R_EPS, x - R_J);
  endfunction

  // a[i][j] = 1 when node j inhibits node i (nodes 0..4)
  typedef bit adj_m [5][5];

  function automatic int coupling(int i, int x[5], adj_m a);
    int cnt;
    cnt = 0;
    for (int j = 0; j < 5; j++)
      if (j != i && a[i][j] && x[j] >= R_TH) cnt++;
    return -(mul(R_G, x[i] - R_NU) * cnt);
  endfunction

  function automatic bit [31:0] lfsr_next(bit [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  // noise sample from the low 13 bits
  function automatic int noise_of(bit [31:0] s);
    return (s[12] ? -4096 : 0) + int'(s[11:0]);
  endfunction

  typedef int tup_t [5];  // nodes 0..4, positions as in <(0,1),(2,3),4>

  function automatic void tuple_of(input int sidx, output tup_t t);
    for (int p = 0; p < 5; p++) t[p] = TABLE[sidx-1][p] - "1";
  endfunction

  function automatic int index_of(tup_t t);
    tup_t u;
    for (int s = 1; s <= 30; s++) begin
      tuple_of(s, u);
      if (u[4] == t[4] && ((u[0] == t[0] && u[1] == t[1]) || (u[0] == t[1] && u[1] == t[0])))
        return s;
    end
    return 0;
  endfunction

  function automatic void adj_of(input tup_t t, output adj_m a);
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) a[i][j] = 0;
    // cluster c inhibits cluster c+1 (cyclically)
    for (int p = 0; p < 5; p++)
      for (int q = 0; q < 5; q++) begin
        int cp, cq;
        cp = (p < 2) ? 0 : (p < 4) ? 1 : 2;
        cq = (q < 2) ? 0 : (q < 4) ? 1 : 2;
        if (cq == (cp + 1) % 3) a[t[q]][t[p]] = 1;
      end
  endfunction

  function automatic bit in_cluster(tup_t t, int c, int node);
    case (c)
      0: return t[0] == node || t[1] == node;
      1: return t[2] == node || t[3] == node;
      default: return t[4] == node;
    endcase
  endfunction

  // k in active cluster, l in previous one: smallest (l - k) mod 5, then the
  // first k clockwise from the first node of the third cluster.
  function automatic void pick_kl(input tup_t t, input int act, output int k, output int l);
    int prv, oth, start;
    prv = (act + 2) % 3;
    oth = (act + 1) % 3;
    start = (oth == 0) ? t[0] : (oth == 1) ? t[2] : t[4];
    for (int d = 1; d <= 4; d++)
      for (int s = 1; s <= 4; s++) begin
        int kk;
        kk = (start + s) % 5;
        if (in_cluster(t, act, kk) && in_cluster(t, prv, (kk + d) % 5)) begin
          k = kk; l = (kk + d) % 5; return;
        end
      end
    k = -1; l = -1;
  endfunction

  function automatic void swap_tuple(inout tup_t t, input int k, input int l);
    for (int p = 0; p < 5; p++)
      if (t[p] == k) t[p] = l; else if (t[p] == l) t[p] = k;
  endfunction

  // state number reached from state sidx when cluster 'act' is active at the switch
  function automatic int successor(int sidx, int act);
    tup_t t;
    int k, l;
    tuple_of(sidx, t);
    pick_kl(t, act, k, l);
    swap_tuple(t, k, l);
    return index_of(t);
  endfunction

endpackage
