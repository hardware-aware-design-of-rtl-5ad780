// tdf_chain: structural adders and delay registers of one side of a
// transposed second-order section.
//
// Computes  s[n] = c0*p0[n] + c1*p1[n-1] + c2*p2[n-2]  in the transposed
// form of the paper's Fig. 1:  s = c0*p0 + z^-1(c1*p1 + z^-1(c2*p2)),
// where p_k are the (unsigned-sign) products delivered by the multiplier
// block and c_k = -1 when TAPS[k].neg, +1 otherwise. The numerator of the
// filter uses one chain with the b_k products, the denominator another with
// the -a_k products (its tap 0 is a zero tap).
//
// Zero taps (TAPS[k].src < 0) remove their structural adder, and a register
// that would only ever hold zero is removed too; this is how sparse
// coefficient sets (e.g. b2 = a2 = 0) save adders. Tap signs are folded into
// the adders as subtractions. When a value passes a register without an
// adder its sign is carried along at elaboration time and applied by the
// next adder; only a chain whose every term is negative ends in a negation.
//
// Timing: s is combinational in p0 and the registers. The registers load on
// a rising clk edge when en = 1 (one sample per enabled cycle) and clear on
// a synchronous active-high rst. The reset and enable are this design's own
// choice; the paper does not describe them.
//
// Ports: clk, rst, en; p[3] (W_P bits); s (W_P+2 bits, exact).
module tdf_chain
  import iir_pkg::*;
#(
  parameter int       W_P  = 22,
  parameter ag_taps_t TAPS = LP14_TAPS_B
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  en,
  input  logic signed [W_P-1:0] p [3],
  output logic signed [W_P+1:0] s
);

  localparam int W_S = W_P + 2;

  localparam bit P0 = (TAPS[0].src >= 0);
  localparam bit P1 = (TAPS[1].src >= 0);
  localparam bit P2 = (TAPS[2].src >= 0);
  localparam bit N0 = TAPS[0].neg;
  localparam bit N1 = TAPS[1].neg;
  localparam bit N2 = TAPS[2].neg;

  // R2: register z^-1 after tap 2 exists; R1: register after tap 1 exists.
  localparam bit R2 = P2;
  localparam bit R1 = P1 || R2;
  // Sign carried by the value leaving stage 1 (into register r1) and stage 0.
  localparam bit S1 = P1 ? N1 : N2;
  localparam bit S0 = P0 ? N0 : S1;

  logic signed [W_S-1:0] r2, r1, v1, v0;

  // Stage 2: z^-1 of the tap-2 product.
  if (R2) begin : g_r2
    always_ff @(posedge clk) begin
      if (rst)     r2 <= '0;
      else if (en) r2 <= W_S'(p[2]);
    end
  end else begin : g_no_r2
    assign r2 = '0;
  end

  // Stage 1: tap-1 product joined with the delayed tap-2 value.
  if (P1 && R2) begin : g_add1
    if (N1 == N2) begin : g_same
      assign v1 = W_S'(p[1]) + r2;
    end else begin : g_diff
      assign v1 = W_S'(p[1]) - r2;
    end
  end else if (P1) begin : g_pass1
    assign v1 = W_S'(p[1]);
  end else begin : g_carry1
    assign v1 = r2;
  end

  if (R1) begin : g_r1
    always_ff @(posedge clk) begin
      if (rst)     r1 <= '0;
      else if (en) r1 <= v1;
    end
  end else begin : g_no_r1
    assign r1 = '0;
  end

  // Stage 0: tap-0 product joined with the delayed stage-1 value.
  if (P0 && R1) begin : g_add0
    if (N0 == S1) begin : g_same
      assign v0 = W_S'(p[0]) + r1;
    end else begin : g_diff
      assign v0 = W_S'(p[0]) - r1;
    end
  end else if (P0) begin : g_pass0
    assign v0 = W_S'(p[0]);
  end else begin : g_carry0
    assign v0 = r1;
  end

  if (S0 && (P0 || R1)) begin : g_negate
    assign s = -v0;
  end else begin : g_pos
    assign s = v0;
  end

endmodule
