// fix_iir_shiftadd: faithfully rounded multiplierless second-order IIR
// filter in transposed direct form.
//
//   y[n] = b0 x[n] + b1 x[n-1] + b2 x[n-2] - a1 y[n-1] - a2 y[n-2]
//
// with fixed-point coefficients b_k = B_k 2^LSB_B and a_k = A_k 2^LSB_A
// (B_k, A_k small integers). No multiplier is used: the input x goes
// through the numerator shift-and-add block (mcm_shiftadd, graph GRAPH_B),
// the fed-back output through the denominator block (graph GRAPH_A). Their
// products enter two transposed chains of structural adders and z^-1
// registers (tdf_chain); iir_quantizer adds the two chain outputs, truncates
// the exact sum to the extended format LSB_EXT = LSB_OUT - G (this value is
// fed back) and rounds it to the output format. Every adder before that
// truncation is exact; widths follow from the formats and the adder graphs.
//
// This is the architecture the paper generates for its filters; the default
// parameters are the paper's lp1_4 example (Fig. 8): 25/128, 40/128,
// 25/128 over 1 - 40/64 z^-1 + 20/64 z^-2, 7 adders, G = 3, 16-bit input
// with MSB weight 2^-1 and 16-bit output. MSB_OUT = 0 is derived here from
// the filter's worst-case peak gain (1.33, so |y| < 0.67); the rounding of
// the output, the enable and the reset are this design's choices.
//
// Interface: x (W_IN bits, weight 2^(MSB_IN-W_IN+1) per LSB) is sampled
// when en = 1 at a rising clk edge; y (W_OUT bits, LSB weight 2^LSB_OUT) is
// the output for the x currently applied, combinationally (zero latency,
// one sample per enabled cycle). rst clears the filter state synchronously.
// overflow rises if a result ever wraps; it stays 0 for inputs in range.
// N_ADDERS reports the adder count: multiplier blocks plus structural.
module fix_iir_shiftadd
  import iir_pkg::*;
#(
  parameter int        W_IN      = 16,
  parameter int        MSB_IN    = -1,
  parameter int        W_OUT     = 16,
  parameter int        MSB_OUT   = 0,
  parameter int        G         = LP14_G,
  parameter int        LSB_B     = LP14_LSB_B,
  parameter int        LSB_A     = LP14_LSB_A,
  parameter int        N_B       = LP14_NB,
  parameter ag_graph_t GRAPH_B   = LP14_GRAPH_B,
  parameter ag_taps_t  TAPS_B    = LP14_TAPS_B,
  parameter int        N_A       = LP14_NA,
  parameter ag_graph_t GRAPH_A   = LP14_GRAPH_A,
  parameter ag_taps_t  TAPS_A    = LP14_TAPS_A,
  parameter bit        ROUND_OUT = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic signed [W_IN-1:0]  x,
  output logic signed [W_OUT-1:0] y,
  output logic                    overflow
);

  localparam int LSB_IN  = MSB_IN - W_IN + 1;
  localparam int LSB_OUT = MSB_OUT - W_OUT + 1;
  localparam int LSB_EXT = LSB_OUT - G;
  localparam int W_EXT   = MSB_OUT - LSB_EXT + 1;

  localparam int W_PB = W_IN  + growth_bits(ag_max_const(GRAPH_B, N_B, TAPS_B));
  localparam int W_PA = W_EXT + growth_bits(ag_max_const(GRAPH_A, N_A, TAPS_A));

  localparam bit HAS_B = chain_nonzero(TAPS_B);
  localparam bit HAS_A = chain_nonzero(TAPS_A);
  localparam int N_ADDERS = N_B + N_A + chain_adders(TAPS_B) + chain_adders(TAPS_A)
                          + ((HAS_B && HAS_A) ? 1 : 0);

  if (TAPS_A[0].src >= 0) begin : g_a0_check
    $error("fix_iir_shiftadd: tap 0 of the denominator must be zero (a0 = 1 is implicit)");
  end

  logic signed [W_PB-1:0]  pb [3];
  logic signed [W_PA-1:0]  pa [3];
  logic signed [W_PB+1:0]  sb;
  logic signed [W_PA+1:0]  sa;
  logic signed [W_EXT-1:0] y_ext;

  // Numerator multiplier block ("MCM B").
  mcm_shiftadd #(
    .W_IN(W_IN), .N_NODES(N_B), .GRAPH(GRAPH_B), .TAPS(TAPS_B), .W_P(W_PB)
  ) u_mcm_b (
    .x(x), .p(pb)
  );

  // Denominator multiplier block ("MCM A"), fed by y in the extended format.
  mcm_shiftadd #(
    .W_IN(W_EXT), .N_NODES(N_A), .GRAPH(GRAPH_A), .TAPS(TAPS_A), .W_P(W_PA)
  ) u_mcm_a (
    .x(y_ext), .p(pa)
  );

  // Structural adders and delays.
  tdf_chain #(.W_P(W_PB), .TAPS(TAPS_B)) u_chain_b (
    .clk(clk), .rst(rst), .en(en), .p(pb), .s(sb)
  );
  tdf_chain #(.W_P(W_PA), .TAPS(TAPS_A)) u_chain_a (
    .clk(clk), .rst(rst), .en(en), .p(pa), .s(sa)
  );

  // Final adder, truncation to l_ext and rounding to l_out.
  iir_quantizer #(
    .W_BS(W_PB + 2), .LB(LSB_IN + LSB_B),
    .W_AS(W_PA + 2), .LA(LSB_EXT + LSB_A),
    .MSB_OUT(MSB_OUT), .LSB_OUT(LSB_OUT), .LSB_EXT(LSB_EXT),
    .ROUND_OUT(ROUND_OUT)
  ) u_quant (
    .bs(sb), .as(sa), .y_ext(y_ext), .y(y), .ovf(overflow)
  );

  // The formats are chosen so that nothing wraps.
  always_ff @(posedge clk) begin
    if (!rst && en) begin
      a_no_overflow: assert (!overflow)
        else $error("fix_iir_shiftadd: result wrapped, MSB_OUT too small for this input");
    end
  end

endmodule
