// tb_mx_converter -- self-checking test of the binary32 -> MX6/MX9 converter.
// Random groups with a spread of exponents (and some zeros) are converted in
// both formats; the shared exponent, microexponents, signs and mantissas are
// compared with a reference computed in floating point: the mantissa must be
// floor(|x| / 2^(E - 127 - mu - (M-1))) limited to the format width.
module tb_mx_converter;
  import mixdit_pkg::*;
  import tb_mx_pkg::*;

  logic [31:0] vals [GROUP];
  mx_prec_e    prec;
  mx_group_t   grp;
  int          checks = 0, failures = 0;

  mx_converter dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int emax, m, sube, mu_exp, exp_mant;
    real x, q;
    int base;
    for (int t = 0; t < 400; t++) begin
      base = 100 + $urandom_range(50);
      prec = (t % 2) ? MX9 : MX6;
      for (int i = 0; i < GROUP; i++) begin
        vals[i] = rand_fp32(base, base + 1 + $urandom_range(t % 8));
        if ($urandom_range(9) == 0) vals[i] = 32'h0;
      end
      #1;
      emax = 0;
      for (int i = 0; i < GROUP; i++) if (int'(vals[i][30:23]) > emax) emax = int'(vals[i][30:23]);
      m = (prec == MX9) ? 7 : 4;
      checks++;
      if (int'(grp.exp) != emax || grp.prec != prec) begin
        failures++; $display("FAIL exp t=%0d got %0d exp %0d", t, grp.exp, emax);
      end
      for (int s = 0; s < NSUB; s++) begin
        sube = (vals[2*s][30:23] > vals[2*s+1][30:23]) ? int'(vals[2*s][30:23]) : int'(vals[2*s+1][30:23]);
        mu_exp = (sube < emax) ? 1 : 0;
        checks++;
        if (int'(grp.mu[s]) != mu_exp) begin failures++; $display("FAIL mu t=%0d s=%0d", t, s); end
      end
      for (int i = 0; i < GROUP; i++) begin
        x = fabs(fp32_val(vals[i]));
        q = x / pow2(emax - 127 - int'(grp.mu[i/2]) - (m - 1));
        exp_mant = int'($floor(q));
        checks++;
        if (int'(grp.mant[i]) != exp_mant || (vals[i] != 0 && grp.sign[i] != vals[i][31])) begin
          failures++;
          $display("FAIL mant t=%0d i=%0d got %0d exp %0d (q=%f)", t, i, grp.mant[i], exp_mant, q);
        end
      end
    end
    // Known case: 1.5, -0.75, 6.0, 0.25 ... MX6: E = exp(6.0) = 129.
    for (int i = 0; i < GROUP; i++) vals[i] = 32'h0;
    vals[0] = 32'h3FC00000;  // 1.5
    vals[1] = 32'hBF400000;  // -0.75
    vals[2] = 32'h40C00000;  // 6.0
    vals[3] = 32'h3E800000;  // 0.25
    prec = MX6;
    #1;
    checks++;
    // subgroup 0 max exp 127 < 129 -> mu=1: 1.5 -> 1.5/2^(2-1-3)=6, 0.75 -> 3
    // subgroup 1 has 6.0 -> mu=0: 6.0/2^(2-3)=12, 0.25 -> 0.5 -> 0
    if (grp.exp != 8'd129 || grp.mu[1:0] != 2'b01 || grp.mant[0] != 6 || grp.mant[1] != 3 ||
        !grp.sign[1] || grp.mant[2] != 12 || grp.mant[3] != 0) begin
      failures++; $display("FAIL known case");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
