// mcm_shiftadd: shift-and-add multiple-constant multiplier block.
//
// Multiplies one signed input by the three coefficients of one side of a
// second-order section using only adders and wired shifts. The structure is
// an adder graph (see iir_pkg): every node is one adder or subtractor of two
// shifted earlier nodes, node 0 being the input itself. Each of the three
// outputs is one node shifted left; the coefficient's sign is not applied
// here but by the structural adder that consumes the product. This is the
// multiplier-block model of the paper (one block for the b_k, one for the a_k,
// minimum adders found by an ILP); the graph itself is a parameter.
//
// All arithmetic is exact: nodes and products are W_P bits wide, and the
// block refuses to elaborate when W_P is too narrow for the graph's largest
// constant. Purely combinational, no clock.
//
// Ports:
//   x      input, W_IN-bit two's complement
//   p[k]   output, W_P bits: node[TAPS[k].src] << TAPS[k].sh, or 0 for a
//          zero tap
// Defaults: the lp1_4 numerator block (5x, 25x; 2 adders).
module mcm_shiftadd
  import iir_pkg::*;
#(
  parameter int        W_IN    = 16,
  parameter int        N_NODES = LP14_NB,
  parameter ag_graph_t GRAPH   = LP14_GRAPH_B,
  parameter ag_taps_t  TAPS    = LP14_TAPS_B,
  parameter int        W_P     = W_IN + growth_bits(ag_max_const(GRAPH, N_NODES, TAPS))
) (
  input  logic signed [W_IN-1:0] x,
  output logic signed [W_P-1:0]  p [3]
);

  localparam int W_NEED = W_IN + growth_bits(ag_max_const(GRAPH, N_NODES, TAPS));

  if (W_P < W_NEED) begin : g_width_check
    $error("mcm_shiftadd: W_P=%0d too narrow, the graph needs %0d bits", W_P, W_NEED);
  end
  if (N_NODES < 0 || N_NODES > AG_MAX_NODES) begin : g_nodes_check
    $error("mcm_shiftadd: N_NODES=%0d out of range", N_NODES);
  end

  logic signed [W_P-1:0] node [N_NODES+1];

  assign node[0] = W_P'(x);

  for (genvar i = 1; i <= N_NODES; i++) begin : g_node
    localparam ag_node_t ND = GRAPH[i-1];
    logic signed [W_P-1:0] opa, opb;
    assign opa = node[ND.src_a] <<< ND.sh_a;
    assign opb = node[ND.src_b] <<< ND.sh_b;
    if (!ND.neg_a && !ND.neg_b) begin : g_add
      assign node[i] = opa + opb;
    end else if (!ND.neg_a && ND.neg_b) begin : g_sub_b
      assign node[i] = opa - opb;
    end else if (ND.neg_a && !ND.neg_b) begin : g_sub_a
      assign node[i] = opb - opa;
    end else begin : g_neg
      assign node[i] = -(opa + opb);
    end
  end

  for (genvar k = 0; k < 3; k++) begin : g_tap
    if (TAPS[k].src < 0) begin : g_zero
      assign p[k] = '0;
    end else begin : g_prod
      assign p[k] = node[TAPS[k].src] <<< TAPS[k].sh;
    end
  end

endmodule
