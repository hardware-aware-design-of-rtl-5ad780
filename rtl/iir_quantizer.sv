// iir_quantizer: last structural adder and the two quantization steps of
// the filter output.
//
// Inputs are the exact sums of the two transposed chains, as integers with
// known LSB weights: the numerator sum bs (weight 2^LB, LB = l_in + l_b) and
// the denominator sum as (weight 2^LA, LA = l_ext + l_a). Both are shifted
// onto their common LSB min(LB, LA) and added exactly; this adder and the
// shifts are the top row "<< l_b, +, << l_a" of the paper's lp1_4 datapath.
// The exact result is then
//   - truncated (rounded toward minus infinity) to the extended internal
//     format: y_ext has LSB weight 2^LSB_EXT and MSB weight 2^MSB_OUT. This
//     is the value fed back to the denominator multiplier block;
//   - rounded from y_ext to the output format (LSB 2^LSB_OUT): round to
//     nearest, ties up, when ROUND_OUT = 1, truncation when ROUND_OUT = 0.
// LSB_EXT = LSB_OUT - G where G are the guard bits that the worst-case peak
// gain of 1/A(z) asks for; G is a parameter, computed offline.
// Rounding the output to nearest (instead of a second truncation) is this
// design's choice: with truncation the output error bound of the lp1_4
// filter, 2^LSB_OUT + WCPG(1/A) 2^LSB_EXT ~ 1.26 ulp, is not faithful.
//
// ovf = 1 flags that y_ext or y did not fit its format (wrapped). With
// MSB_OUT taken from the filter's worst-case peak gain it never rises.
// Purely combinational.
module iir_quantizer
  import iir_pkg::*;
#(
  parameter int W_BS      = 24,
  parameter int LB        = -23,
  parameter int W_AS      = 27,
  parameter int LA        = -24,
  parameter int MSB_OUT   = 0,
  parameter int LSB_OUT   = -15,
  parameter int LSB_EXT   = -18,
  parameter bit ROUND_OUT = 1'b1
) (
  input  logic signed [W_BS-1:0]              bs,
  input  logic signed [W_AS-1:0]              as,
  output logic signed [MSB_OUT-LSB_EXT:0]     y_ext,
  output logic signed [MSB_OUT-LSB_OUT:0]     y,
  output logic                                ovf
);

  localparam int W_EXT = MSB_OUT - LSB_EXT + 1;
  localparam int W_OUT = MSB_OUT - LSB_OUT + 1;
  localparam int G     = LSB_OUT - LSB_EXT;
  localparam int L     = min_i(LB, LA);
  localparam int W_ACC = max_i(W_BS + LB - L, W_AS + LA - L) + 1;
  // Width of the truncated value before it is narrowed to W_EXT.
  localparam int W_T   = (LSB_EXT >= L) ? max_i(W_ACC - (LSB_EXT - L), W_EXT)
                                        : W_ACC + (L - LSB_EXT);

  if (G < 0) begin : g_g_check
    $error("iir_quantizer: LSB_EXT=%0d above LSB_OUT=%0d", LSB_EXT, LSB_OUT);
  end

  logic signed [W_ACC-1:0] acc;
  logic signed [W_T-1:0]   t;
  logic                    ovf_ext, ovf_out;

  // Final structural adder, exact.
  assign acc = (W_ACC'(bs) <<< (LB - L)) + (W_ACC'(as) <<< (LA - L));

  // Truncation to l_ext.
  if (LSB_EXT >= L) begin : g_trunc
    assign t = W_T'(acc >>> (LSB_EXT - L));
  end else begin : g_extend
    assign t = W_T'(acc) <<< (L - LSB_EXT);
  end
  assign y_ext   = t[W_EXT-1:0];
  assign ovf_ext = (W_T'(y_ext) != t);

  // Rounding to l_out.
  if (G == 0) begin : g_same
    assign y       = y_ext;
    assign ovf_out = 1'b0;
  end else begin : g_round
    logic signed [W_EXT:0] r;
    logic signed [W_EXT:0] q;
    if (ROUND_OUT) begin : g_nearest
      assign r = (W_EXT + 1)'(y_ext) + (W_EXT + 1)'(1 <<< (G - 1));
    end else begin : g_floor
      assign r = (W_EXT + 1)'(y_ext);
    end
    assign q       = r >>> G;
    assign y       = q[W_OUT-1:0];
    assign ovf_out = ((W_EXT + 1)'(y) != q);
  end

  assign ovf = ovf_ext | ovf_out;

endmodule
