// tb_fix_iir_shiftadd: end-to-end test of the filter at its default
// parameters (lp1_4, 16-bit input and output, G = 3, 7 adders).
//
// Reference: the direct-form difference equation
//   y_ext[n] = floor( sum_k B_k x[n-k] 2^(l_in+l_b) - sum_k A_k y_ext[n-k] 2^(l_ext+l_a) )
// evaluated in integers from the coefficients of the lp1_4 transfer function
// (B = 25, 40, 25 with l_b = -7; A = -40, 20 with l_a = -6), not from the
// adder graphs, followed by round-to-nearest to l_out. The transposed
// shift-and-add datapath must match it bit for bit.
// A double-precision model of the ideal filter checks that the output is
// faithful: |y - y_ideal| < 2^l_out on every sample.
// Workload: the lp1_4 specification, passband [0, 0.3 pi] with gain in
// [0.94, 1.06], stopband [0.7 pi, pi] with gain <= 0.06, measured with
// sinusoids on the 16-bit datapath.
// Mechanisms counted: zero-latency output, hold while en = 0, synchronous
// reset, truncation to l_ext discarding bits, output rounded up, no overflow.
module tb_fix_iir_shiftadd;
  import iir_pkg::*;
  localparam int W_IN = 16, MSB_IN = -1, W_OUT = 16, MSB_OUT = 0, G = 3;
  localparam int LSB_IN = MSB_IN - W_IN + 1;      // -16
  localparam int LSB_OUT = MSB_OUT - W_OUT + 1;   // -15
  localparam int LSB_EXT = LSB_OUT - G;           // -18
  localparam int LSB_B = -7, LSB_A = -6;
  localparam longint B0 = 25, B1 = 40, B2 = 25;   // b_k * 2^7
  localparam longint A1 = -40, A2 = 20;           // a_k * 2^6
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic signed [W_IN-1:0]  x = '0;
  logic signed [W_OUT-1:0] y;
  logic overflow;

  int checks = 0, failures = 0;
  int n_hold = 0, n_reset = 0, n_trunc = 0, n_roundup = 0, n_samples = 0;
  int n_spec = 0;

  fix_iir_shiftadd dut (.clk(clk), .rst(rst), .en(en), .x(x), .y(y), .overflow(overflow));

  always #5 clk = ~clk;

  // Watchdog.
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference state (integers) and ideal state (reals).
  longint rx1, rx2, ry1, ry2;
  real ix1, ix2, iy1, iy2;

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic longint floor_shift(longint v, int s);
    return v >>> s;   // arithmetic shift = floor division by 2^s
  endfunction

  // Exact reference: returns y_ext for input xi and the current state.
  function automatic longint ref_yext(longint xi);
    // common LSB: min(l_in + l_b, l_ext + l_a) = min(-23, -24) = -24
    longint num;
    num = ((B0 * xi + B1 * rx1 + B2 * rx2) <<< ((LSB_IN + LSB_B) - (LSB_EXT + LSB_A)))
        + (-A1 * ry1 - A2 * ry2);
    return floor_shift(num, LSB_EXT - (LSB_EXT + LSB_A));
  endfunction

  // True when the truncation to l_ext drops nonzero bits.
  function automatic bit ref_discards(longint xi);
    longint num;
    num = ((B0 * xi + B1 * rx1 + B2 * rx2) <<< ((LSB_IN + LSB_B) - (LSB_EXT + LSB_A)))
        + (-A1 * ry1 - A2 * ry2);
    return (num & ((longint'(1) <<< (-LSB_A)) - 1)) != 0;
  endfunction

  function automatic longint ref_round(longint ye);
    return (ye + (longint'(1) <<< (G - 1))) >>> G;
  endfunction

  function automatic real ideal_y(real xv);
    return (B0 * xv + B1 * ix1 + B2 * ix2) / 128.0 - (A1 * iy1 + A2 * iy2) / 64.0;
  endfunction

  task automatic ref_reset();
    rx1 = 0; rx2 = 0; ry1 = 0; ry2 = 0;
    ix1 = 0; ix2 = 0; iy1 = 0; iy2 = 0;
  endtask

  // Apply one sample, check the combinational output, then clock it in.
  // Returns the output as a real.
  task automatic step(input longint xi, input bit enable, output real yr);
    longint ye, yo;
    real yi;
    x  = W_IN'(xi);
    en = enable;
    #1;
    ye = ref_yext(xi);
    yo = ref_round(ye);
    yi = ideal_y(real'(xi) * 2.0 ** LSB_IN);
    checks++;
    if (longint'(y) != yo) begin
      failures++;
      if (failures < 10)
        $display("mismatch n=%0d x=%0d y=%0d expected=%0d", n_samples, xi, y, yo);
    end
    if (enable) begin
      checks++;
      if (rabs(real'(y) * 2.0 ** LSB_OUT - yi) >= 2.0 ** LSB_OUT) begin
        failures++;
        if (failures < 10)
          $display("not faithful n=%0d y=%f ideal=%f", n_samples, real'(y) * 2.0 ** LSB_OUT, yi);
      end
      checks++;
      if (overflow) failures++;
      if (ref_discards(xi)) n_trunc++;
      if ((longint'(y) <<< G) > ye) n_roundup++;
    end
    yr = real'(y) * 2.0 ** LSB_OUT;
    @(posedge clk);
    #1;
    if (enable) begin
      rx2 = rx1; rx1 = xi; ry2 = ry1; ry1 = ye;
      ix2 = ix1; ix1 = real'(xi) * 2.0 ** LSB_IN; iy2 = iy1; iy1 = yi;
      n_samples++;
    end
  endtask

  // Steady-state gain at normalised frequency f (times pi): amplitude of
  // the output's component at f, by correlation with sin and cos over 200
  // settled samples (a whole number of periods for the frequencies used).
  task automatic measure_gain(input real f, output real gain);
    real amp, yr, si, co;
    longint xi;
    amp = 0.45;
    si  = 0.0;
    co  = 0.0;
    for (int n = 0; n < 600; n++) begin
      xi = longint'($floor(amp * $sin(PI * f * n) * 2.0 ** (-LSB_IN) + 0.5));
      step(xi, 1'b1, yr);
      if (n >= 400) begin
        si += yr * $sin(PI * f * n);
        co += yr * $cos(PI * f * n);
      end
    end
    gain = 2.0 / 200.0 * $sqrt(si * si + co * co) / amp;
  endtask

  initial begin
    real yr, gain;
    longint xi;
    ref_reset();
    @(posedge clk); @(posedge clk);
    #1 rst = 1'b0;

    // Adder count of the default architecture (paper: 7 for lp1_4):
    // multiplier blocks plus structural adders, from the default graphs.
    checks++;
    if (LP14_NB + LP14_NA + chain_adders(LP14_TAPS_B) + chain_adders(LP14_TAPS_A) + 1 != 7) begin
      failures++;
      $display("adder count is not 7");
    end

    // Impulse x = 0.25: y = b0 x on the same cycle (zero latency).
    step(16384, 1'b1, yr);
    checks++;
    if (rabs(yr - 0.25 * 25.0 / 128.0) > 2.0 ** LSB_OUT) failures++;
    for (int n = 0; n < 40; n++) step(0, 1'b1, yr);

    // Step response towards the DC gain 90/128 / (44/64) = 1.0227.
    for (int n = 0; n < 200; n++) step(16000, 1'b1, yr);
    checks++;
    if (rabs(yr - 1.0227272727 * 16000.0 * 2.0 ** LSB_IN) > 2.0 ** (LSB_OUT + 1)) begin
      failures++;
      $display("DC gain wrong: %f", yr);
    end

    // Random input, extremes included, with random enable gaps.
    for (int n = 0; n < 20000; n++) begin
      bit e;
      case ($urandom_range(0, 7))
        0:       xi = -32768;
        1:       xi = 32767;
        default: xi = longint'($signed($urandom_range(0, 65535) - 32768));
      endcase
      e = ($urandom_range(0, 5) != 0);
      if (!e) n_hold++;
      // A sample offered with en = 0 must leave no trace: the reference
      // ignores it, so any state change shows up as a later mismatch.
      step(xi, e, yr);
    end

    // Worst case for the output magnitude: input sign follows the sign of
    // the impulse response (|y| reaches 0.5 * WCPG = 0.665).
    for (int r = 0; r < 3; r++) begin
      for (int n = 0; n < 60; n++) step(32767, 1'b1, yr);
      for (int n = 0; n < 60; n++) step(-32768, 1'b1, yr);
    end

    // Synchronous reset in the middle of a stream clears the state.
    step(30000, 1'b1, yr);
    rst = 1'b1;
    @(posedge clk); #1;
    rst = 1'b0;
    ref_reset();
    n_reset++;
    step(0, 1'b1, yr);
    checks++;
    if (y != 0) failures++;

    // Frequency specification of lp1_4 (delta = 0.1 - 0.01*4 = 0.06).
    for (int i = 0; i < 4; i++) begin
      real f;
      f = 0.1 * i;
      if (f > 0.3) f = 0.3;
      ref_reset(); rst = 1'b1; @(posedge clk); #1 rst = 1'b0;
      measure_gain(f == 0.0 ? 0.02 : f, gain);
      $display("gain at %0.2f pi: %f", f == 0.0 ? 0.02 : f, gain);
      checks++; n_spec++;
      if (gain < 0.94 - 0.002 || gain > 1.06 + 0.002) begin
        failures++;
        $display("passband gain at %0.2f pi: %f", f, gain);
      end
    end
    for (int i = 0; i < 4; i++) begin
      real f;
      f = 0.7 + 0.1 * i;
      if (f > 0.98) f = 0.98;
      ref_reset(); rst = 1'b1; @(posedge clk); #1 rst = 1'b0;
      measure_gain(f, gain);
      $display("gain at %0.2f pi: %f", f, gain);
      checks++; n_spec++;
      if (gain > 0.06 + 0.002) begin
        failures++;
        $display("stopband gain at %0.2f pi: %f", f, gain);
      end
    end

    $display("samples=%0d hold=%0d reset=%0d truncations=%0d roundups=%0d spec_points=%0d",
             n_samples, n_hold, n_reset, n_trunc, n_roundup, n_spec);
    checks++;
    if (n_hold == 0 || n_reset == 0 || n_trunc == 0 || n_roundup == 0 || n_spec != 8) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
