// tb_reorder_controller -- self-checking test of the reordering controller.
// Four O buffer banks (64 channels) are modelled in the testbench with a
// one-cycle read latency. Two table contexts get random channel permutations
// and random MX6/MX9 group formats. A reorder of 3 tokens x 4 groups is run
// with random backpressure on grp_ready, and every offered group is checked
// (values in table order, format, token, group index). A second run with
// grp_ready held high checks the rate of 18 cycles per group.
module tb_reorder_controller;
  import mixdit_pkg::*;
  import tb_mx_pkg::*;

  localparam int NB = 4, NCH = NB * 16, NCTX = 2;
  logic clk = 0, rst_n = 0;
  logic cfg_ch_we = 0, cfg_prec_we = 0;
  logic [0:0] cfg_ctx, ctx;
  logic [5:0] cfg_pos, cfg_chan;
  mx_prec_e cfg_prec;
  logic start = 0;
  logic [0:0] slot, rd_slot;
  logic [4:0] n_tok;
  logic [2:0] n_grp;
  logic busy, done, rd_en;
  logic [1:0] rd_bank;
  logic [3:0] rd_row, rd_col;
  logic [31:0] rd_data;
  logic grp_valid, grp_ready = 0;
  logic [31:0] grp_vals [GROUP];
  mx_prec_e grp_prec;
  logic [3:0] grp_tok;
  logic [2:0] grp_idx;

  logic [31:0] obuf [NB][2][16][16];
  int perm [NCTX][NCH];
  mx_prec_e ptab [NCTX][NCH/16];
  int checks = 0, failures = 0, stalls = 0, groups = 0;

  always #5 clk = ~clk;
  reorder_controller #(.NUM_BANKS(NB), .BANK_COLS(16), .ROWS(16), .N_CTX(NCTX), .SLOTS(2)) dut (.*);

  always @(posedge clk) if (rd_en) rd_data <= obuf[rd_bank][rd_slot][rd_row][rd_col];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int c, int s, int nt, int ng, bit random_ready);
    int exp_tok = 0, exp_g = 0, cycles = 0, ch;
    start <= 1; ctx <= c[0:0]; slot <= s[0:0]; n_tok <= 5'(nt); n_grp <= 3'(ng);
    @(posedge clk);
    start <= 0;
    while (!done) begin
      grp_ready <= random_ready ? 1'($urandom_range(3) == 0) : 1'b1;
      @(negedge clk);
      cycles++;
      if (grp_valid && !grp_ready) stalls++;
      if (grp_valid && grp_ready) begin
        groups++;
        checks++;
        if (int'(grp_tok) != exp_tok || int'(grp_idx) != exp_g || grp_prec != ptab[c][exp_g]) begin
          failures++; $display("FAIL header tok %0d g %0d", grp_tok, grp_idx);
        end
        for (int k = 0; k < 16; k++) begin
          ch = perm[c][exp_g * 16 + k];
          checks++;
          if (grp_vals[k] != obuf[ch / 16][s][exp_tok][ch % 16]) begin
            failures++; $display("FAIL value tok %0d g %0d k %0d", exp_tok, exp_g, k);
          end
        end
        exp_g++;
        if (exp_g == ng) begin exp_g = 0; exp_tok++; end
      end
      @(posedge clk);
    end
    checks++;
    if (exp_tok != nt) begin failures++; $display("FAIL only %0d tokens", exp_tok); end
    if (!random_ready) begin
      checks++;
      if (cycles != 18 * nt * ng + 1) begin
        failures++; $display("FAIL rate: %0d cycles for %0d groups", cycles, nt * ng);
      end
    end
  endtask

  initial begin
    int j, t;
    for (int b = 0; b < NB; b++) for (int s = 0; s < 2; s++)
      for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) obuf[b][s][r][c] = $urandom;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int c = 0; c < NCTX; c++) begin
      for (int k = 0; k < NCH; k++) perm[c][k] = k;
      for (int k = NCH - 1; k > 0; k--) begin
        j = $urandom_range(k); t = perm[c][k]; perm[c][k] = perm[c][j]; perm[c][j] = t;
      end
      for (int k = 0; k < NCH; k++) begin
        cfg_ch_we <= 1; cfg_ctx <= c[0:0]; cfg_pos <= k[5:0]; cfg_chan <= 6'(perm[c][k]);
        @(posedge clk);
      end
      cfg_ch_we <= 0;
      for (int g = 0; g < NCH / 16; g++) begin
        ptab[c][g] = (g == 0) ? MX9 : ($urandom_range(1) ? MX9 : MX6);
        cfg_prec_we <= 1; cfg_ctx <= c[0:0]; cfg_pos <= g[5:0]; cfg_prec <= ptab[c][g];
        @(posedge clk);
      end
      cfg_prec_we <= 0;
    end
    run(1, 1, 3, 4, 1);
    run(0, 0, 2, 4, 0);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no backpressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
