// tb_mcm_shiftadd: checks the shift-and-add multiplier block.
//
// Six instances: the lp1_4 numerator block (default parameters, products
// 25x, 40x, 25x), the lp1_4 denominator block (40y, 20y with a negative
// tap), the two hp0 blocks (x, x: no adder; 31y = (y<<5) - y), and the two
// blocks of the 5-bit lp1_4 solution (6x, 9x, 6x; 11y and 6y with a
// negative tap, where 11y = (3y<<2) - y uses a subtraction).
// Each output, with its tap sign applied, is compared with the coefficient
// written out here times the input, for random and extreme inputs.
module tb_mcm_shiftadd;
  import iir_pkg::*;

  localparam int W = 16;
  localparam int WE = 19;

  logic signed [W-1:0]  x;
  logic signed [WE-1:0] ye;
  logic signed [21:0] pb [3];   // 16 + ceil(log2 40)
  logic signed [24:0] pa [3];   // 19 + 6
  logic signed [16:0] hb [3];   // 16 + 1 (|x| shifted by 0, growth 0 -> W)
  logic signed [24:0] ha [3];   // 19 + 5 (32y)
  logic signed [19:0] wb [3];   // 16 + ceil(log2 9)
  logic signed [22:0] wa [3];   // 19 + ceil(log2 12) (3y<<2)

  int checks = 0, failures = 0;

  mcm_shiftadd u_b (.x(x), .p(pb));
  mcm_shiftadd #(.W_IN(WE), .N_NODES(LP14_NA), .GRAPH(LP14_GRAPH_A), .TAPS(LP14_TAPS_A), .W_P(25))
    u_a (.x(ye), .p(pa));
  mcm_shiftadd #(.W_IN(W), .N_NODES(HP0_NB), .GRAPH(HP0_GRAPH_B), .TAPS(HP0_TAPS_B), .W_P(17))
    u_hb (.x(x), .p(hb));
  mcm_shiftadd #(.W_IN(WE), .N_NODES(HP0_NA), .GRAPH(HP0_GRAPH_A), .TAPS(HP0_TAPS_A), .W_P(25))
    u_ha (.x(ye), .p(ha));
  mcm_shiftadd #(.W_IN(W), .N_NODES(LP14W5_NB), .GRAPH(LP14W5_GRAPH_B), .TAPS(LP14W5_TAPS_B), .W_P(20))
    u_wb (.x(x), .p(wb));
  mcm_shiftadd #(.W_IN(WE), .N_NODES(LP14W5_NA), .GRAPH(LP14W5_GRAPH_A), .TAPS(LP14W5_TAPS_A), .W_P(23))
    u_wa (.x(ye), .p(wa));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 5000; n++) begin
      longint xv, yv;
      case (n)
        0: begin xv = -32768; yv = -262144; end
        1: begin xv = 32767;  yv = 262143;  end
        2: begin xv = 0;      yv = 0;       end
        3: begin xv = 1;      yv = 1;       end
        default: begin
          xv = longint'($signed($urandom_range(0, 65535) - 32768));
          yv = longint'($signed($urandom_range(0, 524287) - 262144));
        end
      endcase
      x  = W'(xv);
      ye = WE'(yv);
      #1;
      // lp1_4 numerator: b' = 25, 40, 25 (all positive taps)
      check("b0", pb[0], 25 * xv);
      check("b1", pb[1], 40 * xv);
      check("b2", pb[2], 25 * xv);
      // lp1_4 denominator: -a1' = 40, -a2' = -20 (tap 2 negative)
      check("a0", pa[0], 0);
      check("a1", pa[1], 40 * yv);
      check("a2", -pa[2], -20 * yv);
      // hp0: b0 = 1, b1 = -1 (negative tap), b2 = 0; -a1' = 31
      check("hb0", hb[0], xv);
      check("hb1", -hb[1], -xv);
      check("hb2", hb[2], 0);
      check("ha1", ha[1], 31 * yv);
      check("ha2", ha[2], 0);
      // lp1_4, 5-bit: b' = 6, 9, 6; -a1' = 11, -a2' = -6 (tap 2 negative)
      check("wb0", wb[0], 6 * xv);
      check("wb1", wb[1], 9 * xv);
      check("wb2", wb[2], 6 * xv);
      check("wa0", wa[0], 0);
      check("wa1", wa[1], 11 * yv);
      check("wa2", -wa[2], -6 * yv);
    end
    // Coefficients as the package derives them from the graphs.
    check("coef b1", ag_tap_coef(LP14_GRAPH_B, LP14_NB, LP14_TAPS_B, 1), 40);
    check("coef a2", ag_tap_coef(LP14_GRAPH_A, LP14_NA, LP14_TAPS_A, 2), -20);
    check("coef hp0 a1", ag_tap_coef(HP0_GRAPH_A, HP0_NA, HP0_TAPS_A, 1), 31);
    check("coef 5-bit a1", ag_tap_coef(LP14W5_GRAPH_A, LP14W5_NA, LP14W5_TAPS_A, 1), 11);
    check("coef 5-bit a2", ag_tap_coef(LP14W5_GRAPH_A, LP14W5_NA, LP14W5_TAPS_A, 2), -6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
