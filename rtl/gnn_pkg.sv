// gnn_pkg: shared types, sizes and the geometry tables of the edge-classifying
// interaction-network accelerator.
//
// Number format: every feature, weight and bias is a signed fixed-point value
// with 7 integer bits (sign included) and 7 fractional bits, 14 bits in all
// (Q7.7). The arithmetic helpers truncate toward minus infinity and saturate.
//
// Graph partitioning (geometry-constrained): hits are grouped by detector
// layer into 11 node groups, the barrel layers B1..B4 (type A) and the endcap
// layers E1..E7 (type B). Edges can only join neighbouring layers, which gives
// 13 edge groups: 3 A-A (B1-B2, B2-B3, B3-B4), 4 A-B (B1..B4 to E1) and
// 6 B-B (E1-E2 .. E6-E7). Every group has its own processing elements (PEs):
// 2 per type-A node group, 1 per type-B node group, 4 per A-A edge group and
// 1 per A-B or B-B edge group. Group capacities are 138 (A) / 62 (B) nodes and
// 277 (A-A) / 77 (A-B) / 87 (B-B) edges. A group with several PEs is split
// round-robin: item k of a group goes to lane k mod PEs, at address
// k div PEs of that lane's memories.
//
// The feature sizes (3 node features, 4 edge features, hidden layers of 8)
// are read off the block diagrams of the edge and aggregate PEs; the
// activation functions and the rounding mode are this design's choice.
package gnn_pkg;

  // ---------------------------------------------------------------- numbers
  localparam int unsigned FX_W    = 14;   // total bits
  localparam int unsigned FX_FRAC = 7;    // fractional bits
  typedef logic signed [FX_W-1:0] fx_t;

  localparam fx_t FX_MAX = fx_t'({1'b0, {(FX_W-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(FX_W-1){1'b0}}});
  localparam fx_t FX_ONE = fx_t'(1 << FX_FRAC);

  // ------------------------------------------------------- network sizes
  localparam int unsigned NODE_DIM = 3;   // hit features
  localparam int unsigned EDGE_DIM = 4;   // edge (segment) features
  localparam int unsigned HID      = 8;   // hidden layer width of every MLP
  localparam int unsigned EB_IN    = 2*NODE_DIM + EDGE_DIM;   // 10
  localparam int unsigned NB_IN    = NODE_DIM + EDGE_DIM;     // 7
  localparam int unsigned OUT_DIM  = 1;   // edge score

  typedef fx_t [NODE_DIM-1:0] node_vec_t;
  typedef fx_t [EDGE_DIM-1:0] edge_vec_t;

  // number of weights+biases of a 3-layer MLP IN -> HID -> HID -> OUT
  function automatic int unsigned mlp_nparam(int unsigned nin, int unsigned nout);
    return nin*HID + HID + HID*HID + HID + HID*nout + nout;
  endfunction

  localparam int unsigned EB1_NP = mlp_nparam(EB_IN, EDGE_DIM);  // 196
  localparam int unsigned NB_NP  = mlp_nparam(NB_IN, NODE_DIM);  // 163
  localparam int unsigned EB2_NP = mlp_nparam(EB_IN, OUT_DIM);   // 169

  // ------------------------------------------------------ graph geometry
  localparam int unsigned N_NGRP = 11;   // B1..B4, E1..E7
  localparam int unsigned N_EGRP = 13;
  localparam int unsigned N_NLANE = 15;  // 4*2 + 7*1 Nodeblock PEs
  localparam int unsigned N_ELANE = 22;  // 3*4 + 4*1 + 6*1 Edgeblock / Aggregate PEs

  localparam int unsigned NODE_CAP_A = 138;
  localparam int unsigned NODE_CAP_B = 62;
  localparam int unsigned EDGE_CAP_AA = 277;
  localparam int unsigned EDGE_CAP_AB = 77;
  localparam int unsigned EDGE_CAP_BB = 87;
  localparam int unsigned NODE_PE_A = 2;
  localparam int unsigned NODE_PE_B = 1;
  localparam int unsigned EDGE_PE_AA = 4;
  localparam int unsigned EDGE_PE_AB = 1;
  localparam int unsigned EDGE_PE_BB = 1;

  localparam int unsigned NCNT_W = 8;    // node count / index within a group (0..255)
  localparam int unsigned ECNT_W = 9;    // edge count / index within a group (0..511)
  localparam int unsigned LADDR_W = 7;   // address inside one lane memory (0..127)

  typedef logic [NCNT_W-1:0] nidx_t;
  typedef logic [ECNT_W-1:0] eidx_t;
  typedef logic [LADDR_W-1:0] laddr_t;

  // per-graph sizes, carried with every graph through the pipeline
  typedef struct packed {
    logic [N_NGRP-1:0][NCNT_W-1:0] n_nodes;
    logic [N_EGRP-1:0][ECNT_W-1:0] n_edges;
  } graph_sizes_t;

  // one edge as held in an input edge memory: sender i, receiver j, features
  typedef struct packed {
    nidx_t     i;
    nidx_t     j;
    edge_vec_t e;
  } edge_rec_t;

  // one updated edge as held in the Aggregate input memory: receiver v, e'
  typedef struct packed {
    nidx_t     v;
    edge_vec_t e;
  } agg_rec_t;

  // --- node groups: 0..3 = B1..B4 (type A), 4..10 = E1..E7 (type B)
  function automatic bit ngrp_is_a(int unsigned n);
    return n < 4;
  endfunction
  function automatic int unsigned node_pe(int unsigned n);
    return ngrp_is_a(n) ? NODE_PE_A : NODE_PE_B;
  endfunction
  function automatic int unsigned node_cap(int unsigned n);
    return ngrp_is_a(n) ? NODE_CAP_A : NODE_CAP_B;
  endfunction
  function automatic int unsigned node_lane_depth(int unsigned n);
    return (node_cap(n) + node_pe(n) - 1) / node_pe(n);
  endfunction
  function automatic int unsigned node_lane_base(int unsigned n);
    return ngrp_is_a(n) ? NODE_PE_A*n : NODE_PE_A*4 + (n-4);
  endfunction

  // --- edge groups: 0..2 A-A, 3..6 A-B, 7..12 B-B
  function automatic int unsigned egrp_src(int unsigned g);
    if (g < 3) return g;          // B1->B2, B2->B3, B3->B4
    if (g < 7) return g - 3;      // Bk->E1
    return g - 3;                 // E1->E2 .. E6->E7 (E1 is node group 4)
  endfunction
  function automatic int unsigned egrp_dst(int unsigned g);
    if (g < 3) return g + 1;
    if (g < 7) return 4;
    return g - 2;
  endfunction
  function automatic int unsigned edge_pe(int unsigned g);
    if (g < 3) return EDGE_PE_AA;
    if (g < 7) return EDGE_PE_AB;
    return EDGE_PE_BB;
  endfunction
  function automatic int unsigned edge_cap(int unsigned g);
    if (g < 3) return EDGE_CAP_AA;
    if (g < 7) return EDGE_CAP_AB;
    return EDGE_CAP_BB;
  endfunction
  function automatic int unsigned edge_lane_depth(int unsigned g);
    return (edge_cap(g) + edge_pe(g) - 1) / edge_pe(g);
  endfunction
  function automatic int unsigned edge_lane_base(int unsigned g);
    if (g < 3) return EDGE_PE_AA*g;
    return EDGE_PE_AA*3 + (g-3);
  endfunction

  // lane -> (group, position in group)
  function automatic int unsigned elane_grp(int unsigned l);
    for (int unsigned g = 0; g < N_EGRP; g++)
      if (l >= edge_lane_base(g) && l < edge_lane_base(g) + edge_pe(g)) return g;
    return 0;
  endfunction
  function automatic int unsigned elane_pos(int unsigned l);
    return l - edge_lane_base(elane_grp(l));
  endfunction
  function automatic int unsigned nlane_grp(int unsigned l);
    for (int unsigned n = 0; n < N_NGRP; n++)
      if (l >= node_lane_base(n) && l < node_lane_base(n) + node_pe(n)) return n;
    return 0;
  endfunction
  function automatic int unsigned nlane_pos(int unsigned l);
    return l - node_lane_base(nlane_grp(l));
  endfunction

  // Aggregate PEs whose edges end in node group n
  function automatic int unsigned agg_fanin(int unsigned n);
    int unsigned c = 0;
    for (int unsigned l = 0; l < N_ELANE; l++)
      if (egrp_dst(elane_grp(l)) == n) c++;
    return c;
  endfunction
  function automatic int unsigned agg_lane(int unsigned n, int unsigned m);
    int unsigned c = 0;
    for (int unsigned l = 0; l < N_ELANE; l++)
      if (egrp_dst(elane_grp(l)) == n) begin
        if (c == m) return l;
        c++;
      end
    return 0;
  endfunction

  // number of items of a group with cnt items that fall to lane pos of npe lanes
  function automatic int unsigned lane_count(int unsigned cnt, int unsigned pos, int unsigned npe);
    return (cnt > pos) ? (cnt - pos + npe - 1) / npe : 0;
  endfunction

  // ------------------------------------------------------------ arithmetic
  function automatic fx_t fx_sat(logic signed [47:0] v);
    if (v > 48'(signed'(FX_MAX))) return FX_MAX;
    if (v < 48'(signed'(FX_MIN))) return FX_MIN;
    return fx_t'(v);
  endfunction

  function automatic fx_t fx_add(fx_t a, fx_t b);
    return fx_sat(48'(signed'(a)) + 48'(signed'(b)));
  endfunction

  // hard sigmoid: clamp(x/4 + 1/2, 0, 1)
  function automatic fx_t fx_hsigmoid(fx_t x);
    logic signed [47:0] v;
    v = (48'(signed'(x)) >>> 2) + 48'(1 << (FX_FRAC-1));
    if (v < 0) return '0;
    if (v > 48'(signed'(FX_ONE))) return FX_ONE;
    return fx_t'(v);
  endfunction

endpackage
