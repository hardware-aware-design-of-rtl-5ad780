// tb_iir_quantizer: checks the final adder, the truncation to l_ext and the
// rounding to l_out.
//
// Default instance: lp1_4 formats (bs at 2^-23, as at 2^-24, y_ext at 2^-18,
// y at 2^-15, round to nearest). A second instance truncates the output
// (ROUND_OUT = 0). The expected values are computed with real-number floor
// arithmetic on the weighted inputs, independently of the shift structure.
// Inputs are drawn so that the sum stays inside the output range, plus a
// few that leave it, which must raise ovf.
module tb_iir_quantizer;
  localparam int W_BS = 24, LB = -23, W_AS = 27, LA = -24;
  localparam int LSB_EXT = -18, LSB_OUT = -15;

  logic signed [W_BS-1:0] bs;
  logic signed [W_AS-1:0] as;
  logic signed [18:0] y_ext, y_ext_t;
  logic signed [15:0] y, y_t;
  logic ovf, ovf_t;

  int checks = 0, failures = 0, n_ovf = 0;

  iir_quantizer u_q (.bs(bs), .as(as), .y_ext(y_ext), .y(y), .ovf(ovf));
  iir_quantizer #(.ROUND_OUT(1'b0)) u_t (.bs(bs), .as(as), .y_ext(y_ext_t), .y(y_t), .ovf(ovf_t));

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
    for (int n = 0; n < 20000; n++) begin
      longint vb, va;
      real v;
      longint e_ext, e_rnd, e_trn;
      bit in_range;
      // Each term within +-0.45 so the sum stays below 1 in magnitude.
      vb = longint'($signed($urandom_range(0, 32'h7FFFFF) - 32'h400000)) * 9 / 10;
      va = longint'($signed($urandom_range(0, 32'hFFFFFF) - 32'h800000)) * 9 / 10;
      if (n % 1000 == 7) begin vb = 32'h7FFFFF; va = 32'h3FFFFFF; end  // sum ~ 3: wraps
      bs = W_BS'(vb);
      as = W_AS'(va);
      #1;
      v = real'(vb) * 2.0 ** LB + real'(va) * 2.0 ** LA;
      e_ext = longint'($floor(v * 2.0 ** (-LSB_EXT)));
      e_rnd = longint'($floor(real'(e_ext) * 2.0 ** (LSB_EXT - LSB_OUT) + 0.5));
      e_trn = longint'($floor(real'(e_ext) * 2.0 ** (LSB_EXT - LSB_OUT)));
      in_range = (e_ext >= -(1 <<< 18)) && (e_ext < (1 <<< 18)) && (e_rnd < (1 <<< 15));
      if (in_range) begin
        check("y_ext", y_ext, e_ext);
        check("y round", y, e_rnd);
        check("y trunc", y_t, e_trn);
        check("no ovf", ovf, 0);
      end else begin
        n_ovf++;
        check("ovf", ovf, 1);
      end
    end
    check("ovf exercised", n_ovf > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
