// tb_iir_workloads: the filter in the other configurations evaluated for
// it, each against a bit-exact direct-form reference and an ideal
// double-precision model (faithfulness: |y - y_ideal| < 2^l_out).
//
//   hp0     compensator b = (1, -1, 0), a1 = -31/32, a2 = 0, 3 adders;
//           16-bit input (MSB -1), 16-bit output with MSB 1 (the worst-case
//           peak gain of hp0 is 2), G = 6 guard bits (worst-case peak gain of
//           1/A is 32). Its magnitude response is checked against three
//           points of the reference compensator's response (1 - 2 %).
//   lp1_4   at 8-bit and at 12-bit input/output (G = 3).
//   lp1_4w5 the 5-bit-coefficient solution of lp1_4 (8 adders), 16-bit
//           input/output, MSB_OUT 0 (worst-case peak gain 1.36), G = 3;
//           its passband [0, 0.3 pi] and stopband [0.7 pi, pi] gains are
//           checked against the specification (delta = 0.06).
module tb_iir_workloads;
  import iir_pkg::*;

  localparam real PI = 3.14159265358979323846;

  // Bit-exact reference of y_ext[n] = floor(sum B_k x 2^LB - sum A_k y_ext 2^LA)
  // followed by rounding to nearest at l_out.
  class iir_ref;
    longint b [3];
    longint a [3];
    int lb, la, lsb_ext, g;
    longint x1, x2, y1, y2;
    real ib [3], ia [3];
    real ix1, ix2, iy1, iy2;
    longint last_ext;

    function new(longint b0, longint b1, longint b2, longint a1, longint a2,
                 int lsb_in, int lsb_b, int lsb_out, int guard, int lsb_a);
      b[0] = b0; b[1] = b1; b[2] = b2; a[0] = 0; a[1] = a1; a[2] = a2;
      lb = lsb_in + lsb_b;
      lsb_ext = lsb_out - guard;
      la = lsb_ext + lsb_a;
      g = guard;
      for (int k = 0; k < 3; k++) begin
        ib[k] = real'(b[k]) * 2.0 ** lsb_b;
        ia[k] = real'(a[k]) * 2.0 ** lsb_a;
      end
      reset();
    endfunction

    function void reset();
      x1 = 0; x2 = 0; y1 = 0; y2 = 0; ix1 = 0; ix2 = 0; iy1 = 0; iy2 = 0;
    endfunction

    // Output for xi at the current state (does not advance).
    function longint out(longint xi);
      longint num;
      int l;
      l = (lb < la) ? lb : la;
      num = ((b[0] * xi + b[1] * x1 + b[2] * x2) <<< (lb - l))
          - ((a[1] * y1 + a[2] * y2) <<< (la - l));
      last_ext = num >>> (lsb_ext - l);
      return (last_ext + (longint'(1) <<< (g - 1))) >>> g;
    endfunction

    function real ideal(real xv);
      return ib[0] * xv + ib[1] * ix1 + ib[2] * ix2 - ia[1] * iy1 - ia[2] * iy2;
    endfunction

    function void advance(longint xi, real xv);
      real yv;
      void'(out(xi));
      yv = ideal(xv);
      x2 = x1; x1 = xi; y2 = y1; y1 = last_ext;
      ix2 = ix1; ix1 = xv; iy2 = iy1; iy1 = yv;
    endfunction
  endclass

  logic clk = 1'b0, rst = 1'b1, en = 1'b1;
  logic signed [15:0] x16;
  logic signed [7:0]  x8;
  logic signed [11:0] x12;
  logic signed [15:0] y_hp, y_w5;
  logic signed [7:0]  y8;
  logic signed [11:0] y12;
  logic ovf_hp, ovf8, ovf12, ovf_w5;

  int checks = 0, failures = 0;

  fix_iir_shiftadd #(
    .W_IN(16), .MSB_IN(-1), .W_OUT(16), .MSB_OUT(1), .G(6),
    .LSB_B(HP0_LSB_B), .LSB_A(HP0_LSB_A),
    .N_B(HP0_NB), .GRAPH_B(HP0_GRAPH_B), .TAPS_B(HP0_TAPS_B),
    .N_A(HP0_NA), .GRAPH_A(HP0_GRAPH_A), .TAPS_A(HP0_TAPS_A)
  ) u_hp0 (.clk(clk), .rst(rst), .en(en), .x(x16), .y(y_hp), .overflow(ovf_hp));

  fix_iir_shiftadd #(
    .G(LP14W5_G), .LSB_B(LP14W5_LSB_B), .LSB_A(LP14W5_LSB_A),
    .N_B(LP14W5_NB), .GRAPH_B(LP14W5_GRAPH_B), .TAPS_B(LP14W5_TAPS_B),
    .N_A(LP14W5_NA), .GRAPH_A(LP14W5_GRAPH_A), .TAPS_A(LP14W5_TAPS_A)
  ) u_w5 (.clk(clk), .rst(rst), .en(en), .x(x16), .y(y_w5), .overflow(ovf_w5));

  fix_iir_shiftadd #(.W_IN(8), .W_OUT(8)) u_lp8 (
    .clk(clk), .rst(rst), .en(en), .x(x8), .y(y8), .overflow(ovf8));

  fix_iir_shiftadd #(.W_IN(12), .W_OUT(12)) u_lp12 (
    .clk(clk), .rst(rst), .en(en), .x(x12), .y(y12), .overflow(ovf12));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  iir_ref r_hp, r8, r12, r_w5;

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Compare one output with the reference and the ideal filter.
  function automatic void judge(string what, iir_ref r, longint xi, real xv,
                                longint got, int lsb_out, bit ovf);
    longint e;
    real yi;
    e  = r.out(xi);
    yi = r.ideal(xv);
    checks += 3;
    if (got != e) begin
      failures++;
      if (failures < 10) $display("%s: y=%0d expected %0d", what, got, e);
    end
    if (rabs(real'(got) * 2.0 ** lsb_out - yi) >= 2.0 ** lsb_out) begin
      failures++;
      if (failures < 10) $display("%s: not faithful", what);
    end
    if (ovf) failures++;
  endfunction

  // Drive one sample to all three filters (x given in units of 2^-16).
  task automatic step(input longint xi16, output real y_hp_r, output real y_w5_r);
    longint xi8, xi12;
    real xv16, xv8, xv12;
    xi8  = xi16 >>> 8;
    xi12 = xi16 >>> 4;
    xv16 = real'(xi16) * 2.0 ** -16;
    xv8  = real'(xi8) * 2.0 ** -8;
    xv12 = real'(xi12) * 2.0 ** -12;
    x16 = 16'(xi16); x8 = 8'(xi8); x12 = 12'(xi12);
    #1;
    judge("hp0", r_hp, xi16, xv16, y_hp, -14, ovf_hp);
    judge("lp1_4 8-bit", r8, xi8, xv8, y8, -7, ovf8);
    judge("lp1_4 12-bit", r12, xi12, xv12, y12, -11, ovf12);
    judge("lp1_4 5-bit coefficients", r_w5, xi16, xv16, y_w5, -15, ovf_w5);
    y_hp_r = real'(y_hp) * 2.0 ** -14;
    y_w5_r = real'(y_w5) * 2.0 ** -15;
    @(posedge clk); #1;
    r_hp.advance(xi16, xv16);
    r8.advance(xi8, xv8);
    r12.advance(xi12, xv12);
    r_w5.advance(xi16, xv16);
  endtask

  task automatic restart();
    rst = 1'b1; @(posedge clk); #1 rst = 1'b0;
    r_hp.reset(); r8.reset(); r12.reset(); r_w5.reset();
  endtask

  initial begin
    real yr, yw, peak, amp, si, co;
    real fpts [3];
    real gref [3];
    // Points printed in the reference compensator's response plot.
    fpts[0] = 0.02; gref[0] = 0.9039096;
    fpts[1] = 0.10; gref[1] = 1.0100510;
    fpts[2] = 0.50; gref[2] = 1.0151103;
    r_hp = new(1, -1, 0, -31, 0, -16, HP0_LSB_B, -14, 6, HP0_LSB_A);
    r8   = new(25, 40, 25, -40, 20, -8, LP14_LSB_B, -7, 3, LP14_LSB_A);
    r12  = new(25, 40, 25, -40, 20, -12, LP14_LSB_B, -11, 3, LP14_LSB_A);
    r_w5 = new(6, 9, 6, -11, 6, -16, LP14W5_LSB_B, -15, 3, LP14W5_LSB_A);
    x16 = '0; x8 = '0; x12 = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;

    // hp0 adder count: paper says 3 in total.
    checks++;
    if (HP0_NB + HP0_NA + chain_adders(HP0_TAPS_B) + chain_adders(HP0_TAPS_A) + 1 != 3) begin
      failures++;
      $display("hp0 adder count is not 3");
    end

    // lp1_4 5-bit solution: paper says 8 adders (A_M = 4, A_S = 4).
    checks++;
    if (LP14W5_NB + LP14W5_NA + chain_adders(LP14W5_TAPS_B) + chain_adders(LP14W5_TAPS_A) + 1 != 8) begin
      failures++;
      $display("lp1_4 5-bit adder count is not 8");
    end

    // Random and extreme inputs, including long runs of one extreme.
    for (int n = 0; n < 20000; n++) begin
      longint xi;
      case ($urandom_range(0, 9))
        0: xi = -32768;
        1: xi = 32767;
        default: xi = longint'($signed($urandom_range(0, 65535) - 32768));
      endcase
      step(xi, yr, yw);
    end
    for (int n = 0; n < 300; n++) step(-32768, yr, yw);
    for (int n = 0; n < 300; n++) step(32767, yr, yw);

    // hp0 magnitude response.
    for (int i = 0; i < 3; i++) begin
      restart();
      amp = 0.45;
      si = 0.0;
      co = 0.0;
      // Amplitude at fpts[i] by correlation over 1000 settled samples.
      for (int n = 0; n < 3000; n++) begin
        longint xi;
        xi = longint'($floor(amp * $sin(PI * fpts[i] * n) * 65536.0 + 0.5));
        step(xi, yr, yw);
        if (n >= 2000) begin
          si += yr * $sin(PI * fpts[i] * n);
          co += yr * $cos(PI * fpts[i] * n);
        end
      end
      peak = 2.0 / 1000.0 * $sqrt(si * si + co * co);
      $display("hp0 gain at %0.2f pi: %f (reference compensator %f)", fpts[i], peak / amp, gref[i]);
      checks++;
      if (rabs(peak / amp - gref[i]) > 0.02 * gref[i]) begin
        failures++;
        $display("hp0 gain at %0.2f pi: %f, reference %f", fpts[i], peak / amp, gref[i]);
      end
    end
    // DC is blocked: a constant input decays to zero.
    restart();
    for (int n = 0; n < 1500; n++) step(20000, yr, yw);
    checks++;
    if (rabs(yr) > 2.0 ** -12) begin
      failures++;
      $display("hp0 DC output %f", yr);
    end

    // lp1_4 5-bit solution against the lp1_4 specification.
    for (int i = 0; i < 8; i++) begin
      real f, g;
      f = (i < 4) ? 0.02 + 0.0933333 * i : 0.7 + 0.0933333 * (i - 4);
      f = $floor(f * 100.0 + 0.5) / 100.0;   // 0.02 0.11 0.21 0.30 0.70 0.79 0.89 0.98
      restart();
      amp = 0.45;
      si = 0.0;
      co = 0.0;
      for (int n = 0; n < 600; n++) begin
        longint xi;
        xi = longint'($floor(amp * $sin(PI * f * n) * 65536.0 + 0.5));
        step(xi, yr, yw);
        if (n >= 400) begin
          si += yw * $sin(PI * f * n);
          co += yw * $cos(PI * f * n);
        end
      end
      g = 2.0 / 200.0 * $sqrt(si * si + co * co) / amp;
      $display("lp1_4 5-bit gain at %0.2f pi: %f", f, g);
      checks++;
      if ((i < 4 && (g < 0.94 - 0.002 || g > 1.06 + 0.002)) || (i >= 4 && g > 0.06 + 0.002)) begin
        failures++;
        $display("lp1_4 5-bit solution misses its specification at %0.2f pi", f);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
