// tb_tdf_chain: checks the transposed chain of structural adders and
// delays against s[n] = c0 p0[n] + c1 p1[n-1] + c2 p2[n-2].
//
// Instances: the lp1_4 numerator taps (default, all positive), the lp1_4
// denominator taps (tap 0 zero, tap 2 negative) and the hp0 numerator taps
// (tap 2 zero, tap 1 negative: a register without adder carries the sign).
// Random products, random enable gaps (state must hold) and a reset.
module tb_tdf_chain;
  import iir_pkg::*;

  localparam int W = 22;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic signed [W-1:0] p [3];
  logic signed [W+1:0] s_b, s_a, s_h;

  int checks = 0, failures = 0, holds = 0;

  tdf_chain u_b (.clk(clk), .rst(rst), .en(en), .p(p), .s(s_b));
  tdf_chain #(.W_P(W), .TAPS(LP14_TAPS_A)) u_a (.clk(clk), .rst(rst), .en(en), .p(p), .s(s_a));
  tdf_chain #(.W_P(W), .TAPS(HP0_TAPS_B))  u_h (.clk(clk), .rst(rst), .en(en), .p(p), .s(s_h));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // History of enabled samples of p1 and p2.
  longint p1_d1, p2_d1, p2_d2;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    p[0] = '0; p[1] = '0; p[2] = '0;
    p1_d1 = 0; p2_d1 = 0; p2_d2 = 0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int n = 0; n < 20000; n++) begin
      longint v0, v1, v2;
      bit e;
      v0 = longint'($signed($urandom_range(0, 32'h3FFFFF) - 32'h200000));
      v1 = longint'($signed($urandom_range(0, 32'h3FFFFF) - 32'h200000));
      v2 = longint'($signed($urandom_range(0, 32'h3FFFFF) - 32'h200000));
      if (n == 5) begin v0 = -2097152; v1 = -2097152; v2 = -2097152; end
      e = (n < 10) || ($urandom_range(0, 3) != 0);
      if (!e) holds++;
      if (n == 15000) begin
        rst = 1'b1; @(posedge clk); #1 rst = 1'b0;
        p1_d1 = 0; p2_d1 = 0; p2_d2 = 0;
      end
      p[0] = W'(v0); p[1] = W'(v1); p[2] = W'(v2); en = e;
      #1;
      check("lp14 b", s_b, v0 + p1_d1 + p2_d2);
      check("lp14 a", s_a, p1_d1 - p2_d2);
      check("hp0 b", s_h, v0 - p1_d1);
      @(posedge clk);
      #1;
      if (e) begin
        p2_d2 = p2_d1; p2_d1 = v2; p1_d1 = v1;
      end
    end
    check("holds exercised", holds > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
