// tb_mixdit_top -- end-to-end test of the accelerator with NUM_ARRAYS tiles.
// 1. Two reorder contexts get channel permutations and group formats.
// 2. Activations (broadcast) and per-tile weights are loaded, K-group formats
//    chosen at random (MX6xMX6, MX6xMX9, MX9xMX9); a compute with clear
//    drains into slot 0.
// 3. New operands are loaded; a compute without clear (accumulating onto the
//    first) drains into slot 1 while slot 0 is reordered and converted under
//    random output backpressure.
// 4. Slot 1 is reordered with the other context.
// Every output group is checked element by element against the reference
// product, quantised to the group's format: the error must stay within one
// mantissa step of the group. The run counts each mechanism (narrow and wide
// K-groups, accumulation, compute/reorder overlap, output stall, MX6 and MX9
// output groups) and fails if one never happened. Compute time is checked
// against 4 or 16 cycles per K-group plus the fixed overhead.
module tb_mixdit_top;
  import mixdit_pkg::*;
  import tb_mx_pkg::*;

  localparam int NA = 4, NCH = NA * 16, KG = 6, NCTX = 4;
  logic clk = 0, rst_n = 0;
  logic ld_en = 0, ld_is_w = 0, ld_bcast = 0;
  logic [1:0] ld_array;
  logic [3:0] ld_lane;
  logic [4:0] ld_addr;
  mx_group_t ld_data;
  logic cmd_start = 0, cmd_clear = 0, cmd_drain = 0;
  logic [5:0] cmd_n_groups;
  logic [0:0] cmd_slot, ro_slot;
  logic cmd_busy, cmd_done;
  logic cfg_ch_we = 0, cfg_prec_we = 0;
  logic [1:0] cfg_ctx, ro_ctx;
  logic [5:0] cfg_pos, cfg_chan;
  mx_prec_e cfg_prec;
  logic ro_start = 0;
  logic [4:0] ro_n_tok;
  logic [2:0] ro_n_grp;
  logic ro_busy, ro_done;
  logic out_valid, out_ready = 1;
  mx_group_t out_group;
  logic [3:0] out_tok;
  logic [2:0] out_gidx;
  logic [31:0] perf_wide_groups, perf_out_stalls;

  mx_group_t A [16][KG];
  mx_group_t W [NCH][KG];
  real C [2][16][NCH];
  real S [2][16][NCH];
  int perm [NCTX][NCH];
  mx_prec_e ptab [NCTX][NCH/16];
  int checks = 0, failures = 0;
  int n_narrow = 0, n_wide = 0, n_accum = 0, n_overlap = 0, n_mx9_out = 0, n_mx6_out = 0;
  int n_groups_out = 0;
  bit random_ready = 0;

  always #5 clk = ~clk;
  mixdit_top #(.NUM_ARRAYS(NA), .KG_MAX(32), .N_CTX(NCTX), .SLOTS(2)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (cmd_busy && ro_busy) n_overlap++;
    if (random_ready) out_ready <= 1'($urandom_range(2) == 0);
    else              out_ready <= 1'b1;
  end

  // Output checker: the expected reorder job is described by these.
  int chk_ctx, chk_slot, chk_tok, chk_g;
  always @(negedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int ch, m;
      real step, got, want;
      n_groups_out++;
      checks++;
      if (int'(out_tok) != chk_tok || int'(out_gidx) != chk_g || out_group.prec != ptab[chk_ctx][chk_g]) begin
        failures++; $display("FAIL group header tok %0d g %0d", out_tok, out_gidx);
      end
      if (out_group.prec == MX9) n_mx9_out++; else n_mx6_out++;
      m = (out_group.prec == MX9) ? 7 : 4;
      for (int k = 0; k < 16; k++) begin
        ch = perm[chk_ctx][chk_g * 16 + k];
        want = C[chk_slot][chk_tok][ch];
        got = mx_val(out_group, k);
        step = pow2(int'(out_group.exp) - 127 - int'(out_group.mu[k/2]) - (m - 1));
        checks++;
        if (fabs(got - want) > step * 1.0001 + S[chk_slot][chk_tok][ch] * 1e-6) begin
          failures++;
          $display("FAIL tok %0d pos %0d ch %0d got %g want %g step %g", chk_tok, chk_g * 16 + k, ch, got, want, step);
        end
      end
      chk_g++;
      if (chk_g == NCH / 16) begin chk_g = 0; chk_tok++; end
    end
  end

  task automatic load_operands();
    int kind;
    for (int g = 0; g < KG; g++) begin
      kind = $urandom_range(2);
      if (kind == 0) n_narrow++; else n_wide++;
      for (int i = 0; i < 16; i++) A[i][g] = rand_group((kind == 2) ? MX9 : MX6, 120, 134);
      for (int c = 0; c < NCH; c++) W[c][g] = rand_group((kind >= 1) ? MX9 : MX6, 120, 134);
    end
    for (int g = 0; g < KG; g++) begin
      for (int i = 0; i < 16; i++) begin
        ld_en <= 1; ld_is_w <= 0; ld_bcast <= 1; ld_array <= '0;
        ld_lane <= i[3:0]; ld_addr <= g[4:0]; ld_data <= A[i][g];
        @(posedge clk);
      end
      for (int c = 0; c < NCH; c++) begin
        ld_en <= 1; ld_is_w <= 1; ld_bcast <= 0; ld_array <= 2'(c / 16);
        ld_lane <= 4'(c % 16); ld_addr <= g[4:0]; ld_data <= W[c][g];
        @(posedge clk);
      end
    end
    ld_en <= 0; ld_bcast <= 0;
  endtask

  task automatic reference(int slot_i, bit accumulate);
    for (int i = 0; i < 16; i++)
      for (int c = 0; c < NCH; c++) begin
        real r = accumulate ? C[0][i][c] : 0.0;
        real s = accumulate ? S[0][i][c] : 0.0;
        for (int g = 0; g < KG; g++) begin
          r += dot(A[i][g], W[c][g]);
          s += absdot(A[i][g], W[c][g]);
        end
        C[slot_i][i][c] = r; S[slot_i][i][c] = s;
      end
  endtask

  function automatic int expected_busy();
    int n = 1 + 1 + 32 + 1 + 17;
    for (int g = 0; g < KG; g++) n += (A[0][g].prec == MX9 || W[0][g].prec == MX9) ? 16 : 4;
    return n;
  endfunction

  task automatic start_compute(int slot_i, bit clr);
    cmd_start <= 1; cmd_n_groups <= 6'(KG); cmd_clear <= clr; cmd_drain <= 1; cmd_slot <= slot_i[0:0];
    @(posedge clk);
    cmd_start <= 0;
  endtask

  task automatic start_reorder(int c, int slot_i);
    chk_ctx = c; chk_slot = slot_i; chk_tok = 0; chk_g = 0;
    ro_start <= 1; ro_ctx <= 2'(c); ro_slot <= slot_i[0:0]; ro_n_tok <= 5'd16; ro_n_grp <= 3'(NCH / 16);
    @(posedge clk);
    ro_start <= 0;
    @(posedge clk);
  endtask

  initial begin
    int j, t, cyc, exp_cyc;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // Reorder tables: context c puts a random set of 'outlier' channels first.
    for (int c = 0; c < NCTX; c++) begin
      for (int k = 0; k < NCH; k++) perm[c][k] = k;
      for (int k = NCH - 1; k > 0; k--) begin
        j = $urandom_range(k); t = perm[c][k]; perm[c][k] = perm[c][j]; perm[c][j] = t;
      end
      for (int k = 0; k < NCH; k++) begin
        cfg_ch_we <= 1; cfg_ctx <= 2'(c); cfg_pos <= 6'(k); cfg_chan <= 6'(perm[c][k]);
        @(posedge clk);
      end
      cfg_ch_we <= 0;
      for (int g = 0; g < NCH / 16; g++) begin
        ptab[c][g] = (g < 1 + c % 2) ? MX9 : MX6;
        cfg_prec_we <= 1; cfg_ctx <= 2'(c); cfg_pos <= 6'(g); cfg_prec <= ptab[c][g];
        @(posedge clk);
      end
      cfg_prec_we <= 0;
    end

    // First tile: clear, drain into slot 0.
    load_operands();
    reference(0, 0);
    exp_cyc = expected_busy();
    start_compute(0, 1);
    cyc = 0;
    while (!cmd_done) begin @(posedge clk); if (cmd_busy) cyc++; end
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL compute cycles %0d expected %0d", cyc, exp_cyc); end

    // Second: accumulate into slot 1 while slot 0 is reordered.
    load_operands();
    reference(1, 1);
    n_accum++;
    random_ready = 1;
    start_compute(1, 0);
    start_reorder(2, 0);
    while (cmd_busy || ro_busy) @(posedge clk);
    @(posedge clk);
    checks++;
    if (chk_tok != 16) begin failures++; $display("FAIL reorder 0 ended at token %0d", chk_tok); end

    random_ready = 0;
    start_reorder(1, 1);
    while (ro_busy) @(posedge clk);
    @(posedge clk);
    checks++;
    if (chk_tok != 16) begin failures++; $display("FAIL reorder 1 ended at token %0d", chk_tok); end

    // Mechanism coverage.
    $display("narrow=%0d wide=%0d (perf %0d) accum=%0d overlap=%0d stalls=%0d mx9_out=%0d mx6_out=%0d groups=%0d",
             n_narrow, n_wide, perf_wide_groups, n_accum, n_overlap, perf_out_stalls, n_mx9_out, n_mx6_out, n_groups_out);
    checks++; if (n_narrow == 0)  begin failures++; $display("FAIL no narrow K-group"); end
    checks++; if (n_wide == 0 || int'(perf_wide_groups) != n_wide) begin failures++; $display("FAIL wide count"); end
    checks++; if (n_overlap == 0) begin failures++; $display("FAIL no overlap"); end
    checks++; if (perf_out_stalls == 0) begin failures++; $display("FAIL no output stall"); end
    checks++; if (n_mx9_out == 0 || n_mx6_out == 0) begin failures++; $display("FAIL output formats"); end
    checks++; if (n_groups_out != 2 * 16 * NCH / 16) begin failures++; $display("FAIL group count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
