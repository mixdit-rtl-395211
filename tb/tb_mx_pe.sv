// tb_mx_pe -- self-checking test of one precision-flexible PE.
// Sends random MX groups in the three precision pairs (MX6xMX6 as 4 narrow
// beats, MX6xMX9 and MX9xMX9 as 16 wide beats), checks the accumulator against
// a floating-point reference after every group, checks 'clear', and checks the
// drain path (cap, then shift of out_in into out_q).
module tb_mx_pe;
  import mixdit_pkg::*;
  import tb_mx_pkg::*;

  logic     clk = 0, rst_n = 0, clear = 0, cap = 0, shift = 0;
  pe_beat_t a_in, w_in, a_out, w_out;
  acc_t     out_in, out_q, acc_q;
  int       checks = 0, failures = 0;
  int       n_narrow = 0, n_wide = 0;

  always #5 clk = ~clk;

  mx_pe dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_group(mx_group_t a, mx_group_t w);
    bit wide = (a.prec == MX9) || (w.prec == MX9);
    int nb = wide ? 16 : 4;
    for (int b = 0; b < nb; b++) begin
      pe_beat_t ba = '0, bw = '0;
      ba.valid = 1; ba.first = (b == 0); ba.last = (b == nb - 1); ba.wide = wide;
      ba.prec = a.prec; ba.exp = a.exp;
      bw.valid = 1; bw.first = (b == 0); bw.last = (b == nb - 1); bw.wide = wide;
      bw.prec = w.prec; bw.exp = w.exp;
      for (int l = 0; l < 4; l++) begin
        int e = wide ? b : 4 * b + l;
        if (!wide || l == 0) begin
          ba.sign[l] = a.sign[e]; ba.mu[l] = a.mu[e/2]; ba.mag[l] = a.mant[e];
          bw.sign[l] = w.sign[e]; bw.mu[l] = w.mu[e/2]; bw.mag[l] = w.mant[e];
        end
      end
      a_in <= ba; w_in <= bw;
      @(posedge clk);
    end
    a_in <= '0; w_in <= '0;
    if (wide) n_wide++; else n_narrow++;
  endtask

  task automatic check_acc(real ref_v, real scale, string what);
    real got = acc_val(acc_q);
    checks++;
    if (fabs(got - ref_v) > 1e-7 * scale + 1e-30) begin
      failures++;
      $display("FAIL %s: got %g expected %g", what, got, ref_v);
    end
  endtask

  initial begin
    real ref_v, scale;
    mx_group_t a, w;
    int kind;
    mx_prec_e pa, pw;
    a_in = '0; w_in = '0; out_in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int run = 0; run < 30; run++) begin
      clear <= 1; @(posedge clk); clear <= 0;
      @(posedge clk);
      checks++;
      if (acc_q.m != 0) begin failures++; $display("FAIL clear"); end
      ref_v = 0.0; scale = 0.0;
      for (int g = 0; g < 8; g++) begin
        kind = $urandom_range(2);
        pa = (kind == 2) ? MX9 : MX6;
        pw = (kind >= 1) ? MX9 : MX6;
        a = rand_group(pa, 120, 134);
        w = rand_group(pw, 120, 134);
        send_group(a, w);
        @(posedge clk);    // acc updated after the last beat
        ref_v += dot(a, w);
        scale += absdot(a, w);
        check_acc(ref_v, scale, $sformatf("run %0d group %0d kind %0d", run, g, kind));
      end
    end
    // Known values: a = 14,-2,-7,1 (x 2^?) style check with exact integers.
    clear <= 1; @(posedge clk); clear <= 0;
    a = '0; w = '0; a.prec = MX6; w.prec = MX6; a.exp = 8'd130; w.exp = 8'd126;
    a.mant[0] = 14; a.sign[1] = 1; a.mant[1] = 2; a.sign[2] = 1; a.mant[2] = 7; a.mant[3] = 1;
    w.mant[0] = 4;  w.sign[1] = 1; w.mant[1] = 9; w.sign[2] = 1; w.mant[2] = 11; w.mant[3] = 0;
    send_group(a, w);
    @(posedge clk);
    // (14*4 + 2*9 + 7*11 + 0) * 2^(3-3) * 2^(-1-3) = 151 / 16
    check_acc(151.0 / 16.0, 1.0, "known group");
    // Drain: capture, then shift a value in from above.
    cap <= 1; @(posedge clk); cap <= 0; @(posedge clk);
    checks++;
    if (out_q !== acc_q) begin failures++; $display("FAIL cap"); end
    out_in <= '{m: 32'sd12345, e: -12'sd3};
    shift <= 1; @(posedge clk); shift <= 0; @(posedge clk);
    checks++;
    if (out_q.m != 12345 || out_q.e != -3) begin failures++; $display("FAIL shift"); end
    checks++;
    if (n_narrow == 0 || n_wide == 0) begin failures++; $display("FAIL mode coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
