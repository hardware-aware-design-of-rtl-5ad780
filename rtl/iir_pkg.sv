// iir_pkg: types, constants and elaboration-time helpers shared by the
// multiplierless second-order IIR filter.
//
// An adder graph describes a shift-and-add multiple-constant multiplier.
// Node 0 is the block input (constant 1). Node i >= 1 is one adder/subtractor:
//   node[i] = (+/-)(node[src_a] << sh_a) + (+/-)(node[src_b] << sh_b)
// A tap picks one node and shifts it (a wired shift, no adder):
//   product = node[src] << sh, and the coefficient of the tap is
//   (neg ? -1 : +1) * const(node[src]) * 2**sh.
// The sign of a tap is not applied in the multiplier block; it is folded into
// the structural adder that consumes the product, as in the lp1_4 example
// where the a_2 product is subtracted by the structural adder.
// A tap with src < 0 is a zero coefficient: no product, and the structural
// adder and register that would consume it are removed.
//
// Three filters from the source paper are given here: lp1_4 with 7-bit
// coefficients (the default filter, 7 adders), lp1_4 with 5-bit coefficients
// (8 adders) and the hp0 compensator (3 adders).
package iir_pkg;

  localparam int AG_MAX_NODES = 8;  // adders per multiplier block, upper bound

  typedef struct packed {
    int src_a;
    int sh_a;
    bit neg_a;
    int src_b;
    int sh_b;
    bit neg_b;
  } ag_node_t;

  typedef struct packed {
    int src;  // node index, or -1 for a zero coefficient
    int sh;   // left shift applied to the node
    bit neg;  // coefficient is the negated node value
  } ag_tap_t;

  // Packed arrays, index 0 is the first adder (node 1) / tap k.
  typedef ag_node_t [AG_MAX_NODES-1:0] ag_graph_t;
  typedef ag_tap_t  [2:0]              ag_taps_t;

  localparam ag_node_t AG_NODE_NONE = '{src_a: 0, sh_a: 0, neg_a: 1'b0,
                                        src_b: 0, sh_b: 0, neg_b: 1'b0};
  localparam ag_tap_t  AG_TAP_ZERO  = '{src: -1, sh: 0, neg: 1'b0};

  // Constant computed by node n of graph g (node 0 = 1).
  function automatic longint ag_node_const(ag_graph_t g, int n_nodes, int n);
    longint c [AG_MAX_NODES+1];
    c[0] = 1;
    for (int i = 1; i <= AG_MAX_NODES; i++) begin
      if (i <= n_nodes) begin
        longint a, b;
        a = c[g[i-1].src_a] <<< g[i-1].sh_a;
        b = c[g[i-1].src_b] <<< g[i-1].sh_b;
        c[i] = (g[i-1].neg_a ? -a : a) + (g[i-1].neg_b ? -b : b);
      end else begin
        c[i] = 0;
      end
    end
    return c[n];
  endfunction

  // Signed coefficient realised by tap k (0 for a zero tap).
  function automatic longint ag_tap_coef(ag_graph_t g, int n_nodes, ag_taps_t t, int k);
    longint v;
    if (t[k].src < 0) return 0;
    v = ag_node_const(g, n_nodes, t[k].src) <<< t[k].sh;
    return t[k].neg ? -v : v;
  endfunction

  function automatic longint abs_l(longint v);
    return (v < 0) ? -v : v;
  endfunction

  // Largest magnitude met anywhere in the block: node values, shifted
  // adder operands and shifted tap products. The block's word growth.
  function automatic longint ag_max_const(ag_graph_t g, int n_nodes, ag_taps_t t);
    longint m;
    m = 1;
    for (int i = 1; i <= n_nodes; i++) begin
      longint ca, cb, ci;
      ca = abs_l(ag_node_const(g, n_nodes, g[i-1].src_a)) <<< g[i-1].sh_a;
      cb = abs_l(ag_node_const(g, n_nodes, g[i-1].src_b)) <<< g[i-1].sh_b;
      ci = abs_l(ag_node_const(g, n_nodes, i));
      if (ca > m) m = ca;
      if (cb > m) m = cb;
      if (ci > m) m = ci;
    end
    for (int k = 0; k < 3; k++)
      if (abs_l(ag_tap_coef(g, n_nodes, t, k)) > m) m = abs_l(ag_tap_coef(g, n_nodes, t, k));
    return m;
  endfunction

  // Bits a product c*x gains over x when |c| <= m: ceil(log2(m)).
  function automatic int growth_bits(longint m);
    int b;
    b = 0;
    while ((longint'(1) <<< b) < m) b++;
    return b;
  endfunction

  // Structural adders of one transposed chain out = p0 + z^-1(p1 + z^-1 p2)
  // when zero taps get neither adder nor register.
  function automatic int chain_adders(ag_taps_t t);
    bit r2, r1;
    int n;
    n  = 0;
    r2 = (t[2].src >= 0);
    if ((t[1].src >= 0) && r2) n++;
    r1 = (t[1].src >= 0) || r2;
    if ((t[0].src >= 0) && r1) n++;
    return n;
  endfunction

  function automatic bit chain_nonzero(ag_taps_t t);
    return (t[0].src >= 0) || (t[1].src >= 0) || (t[2].src >= 0);
  endfunction

  function automatic int max_i(int a, int b);
    return (a > b) ? a : b;
  endfunction

  function automatic int min_i(int a, int b);
    return (a < b) ? a : b;
  endfunction

  // ---------------------------------------------------------------------
  // lp1_4 benchmark (paper, Fig. 8 and the transfer function of Sec. III-D):
  //   H(z) = (25 + 40 z^-1 + 25 z^-2) 2^-7 / (1 - 40*2^-6 z^-1 + 20*2^-6 z^-2)
  // Numerator block:  5x = x + (x<<2), 25x = 5x + (5x<<2); b0 = b2 = 25x,
  //                   b1 = 5x << 3.
  // Denominator block (input y): 5y = y + (y<<2); -a1 = 5y << 3 = 40y,
  //                   -a2 = -(5y << 2) = -20y.
  // ---------------------------------------------------------------------
  localparam int LP14_LSB_B = -7;
  localparam int LP14_LSB_A = -6;
  localparam int LP14_G     = 3;
  localparam int LP14_NB    = 2;
  localparam int LP14_NA    = 1;

  localparam ag_graph_t LP14_GRAPH_B = '{
    AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE,
    AG_NODE_NONE, AG_NODE_NONE,
    '{src_a: 1, sh_a: 0, neg_a: 1'b0, src_b: 1, sh_b: 2, neg_b: 1'b0},  // node 2 = 25
    '{src_a: 0, sh_a: 0, neg_a: 1'b0, src_b: 0, sh_b: 2, neg_b: 1'b0}   // node 1 = 5
  };
  localparam ag_taps_t LP14_TAPS_B = '{
    '{src: 2, sh: 0, neg: 1'b0},   // b2 = 25
    '{src: 1, sh: 3, neg: 1'b0},   // b1 = 40
    '{src: 2, sh: 0, neg: 1'b0}    // b0 = 25
  };
  localparam ag_graph_t LP14_GRAPH_A = '{
    AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE,
    AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE,
    '{src_a: 0, sh_a: 0, neg_a: 1'b0, src_b: 0, sh_b: 2, neg_b: 1'b0}   // node 1 = 5
  };
  localparam ag_taps_t LP14_TAPS_A = '{
    '{src: 1, sh: 2, neg: 1'b1},   // -a2 = -20
    '{src: 1, sh: 3, neg: 1'b0},   // -a1 = +40
    AG_TAP_ZERO                    // a0 is the implicit 1 of A(z)
  };

  // ---------------------------------------------------------------------
  // lp1_4 with 5-bit coefficients, the smallest word length for which the
  // specification can be met (paper: Table II, 4 + 4 = 8 adders). The
  // coefficients are read off the magnitude response the paper plots for it:
  //   H(z) = (6 + 9 z^-1 + 6 z^-2) 2^-5 / (1 - 11*2^-4 z^-1 + 6*2^-4 z^-2)
  // The adder graphs are this design's: 3x = x + (x<<1), 9x = 3x + (3x<<1);
  // 3y = y + (y<<1), 11y = (3y<<2) - y.  G = 3 (WCPG of 1/A is 2.30).
  // ---------------------------------------------------------------------
  localparam int LP14W5_LSB_B = -5;
  localparam int LP14W5_LSB_A = -4;
  localparam int LP14W5_G     = 3;
  localparam int LP14W5_NB    = 2;
  localparam int LP14W5_NA    = 2;

  localparam ag_graph_t LP14W5_GRAPH_B = '{
    AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE,
    AG_NODE_NONE, AG_NODE_NONE,
    '{src_a: 1, sh_a: 0, neg_a: 1'b0, src_b: 1, sh_b: 1, neg_b: 1'b0},  // node 2 = 9
    '{src_a: 0, sh_a: 0, neg_a: 1'b0, src_b: 0, sh_b: 1, neg_b: 1'b0}   // node 1 = 3
  };
  localparam ag_taps_t LP14W5_TAPS_B = '{
    '{src: 1, sh: 1, neg: 1'b0},   // b2 = 6
    '{src: 2, sh: 0, neg: 1'b0},   // b1 = 9
    '{src: 1, sh: 1, neg: 1'b0}    // b0 = 6
  };
  localparam ag_graph_t LP14W5_GRAPH_A = '{
    AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE,
    AG_NODE_NONE, AG_NODE_NONE,
    '{src_a: 1, sh_a: 2, neg_a: 1'b0, src_b: 0, sh_b: 0, neg_b: 1'b1},  // node 2 = 11
    '{src_a: 0, sh_a: 0, neg_a: 1'b0, src_b: 0, sh_b: 1, neg_b: 1'b0}   // node 1 = 3
  };
  localparam ag_taps_t LP14W5_TAPS_A = '{
    '{src: 1, sh: 1, neg: 1'b1},   // -a2 = -6
    '{src: 2, sh: 0, neg: 1'b0},   // -a1 = +11
    AG_TAP_ZERO
  };

  // ---------------------------------------------------------------------
  // hp0 compensator (paper, Sec. III-C): b0 = 1, b1 = -1, b2 = 0,
  // a1 = -31/32, a2 = 0; 3 adders in total.
  // Numerator block: no adder. Denominator block: 31y = (y<<5) - y.
  // ---------------------------------------------------------------------
  localparam int HP0_LSB_B = 0;
  localparam int HP0_LSB_A = -5;
  localparam int HP0_NB    = 0;
  localparam int HP0_NA    = 1;

  localparam ag_graph_t HP0_GRAPH_B = '{default: AG_NODE_NONE};
  localparam ag_taps_t  HP0_TAPS_B = '{
    AG_TAP_ZERO,                   // b2 = 0
    '{src: 0, sh: 0, neg: 1'b1},   // b1 = -1
    '{src: 0, sh: 0, neg: 1'b0}    // b0 = 1
  };
  localparam ag_graph_t HP0_GRAPH_A = '{
    AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE,
    AG_NODE_NONE, AG_NODE_NONE, AG_NODE_NONE,
    '{src_a: 0, sh_a: 5, neg_a: 1'b0, src_b: 0, sh_b: 0, neg_b: 1'b1}   // node 1 = 31
  };
  localparam ag_taps_t HP0_TAPS_A = '{
    AG_TAP_ZERO,                   // -a2 = 0
    '{src: 1, sh: 0, neg: 1'b0},   // -a1 = +31
    AG_TAP_ZERO
  };

endpackage
