// tb_sa_tile -- self-checking test of one systolic array tile.
// Loads random A and W groups (the format of each K-group chosen at random,
// the same for all lanes, as the reordered layout gives), runs a command
// with clear and drain into slot 0, then reloads the buffers and runs a
// second command without clear into slot 1, so slot 1 must hold the sum of
// both. Results are read through the O buffer port and compared with
// floating-point references. The busy time of every command must equal
// 1 + 1 + sum(4 per MX6xMX6 group, 16 per group with MX9) + 32 + 1 + 17,
// i.e. the paper's 4 and 16 cycles per group plus fixed overhead.
module tb_sa_tile;
  import mixdit_pkg::*;
  import tb_mx_pkg::*;

  localparam int KG = 8;
  logic clk = 0, rst_n = 0;
  logic ld_en = 0, ld_is_w = 0;
  logic [3:0] ld_lane;
  logic [4:0] ld_addr;
  mx_group_t ld_data;
  logic start = 0, clear = 0, drain = 0;
  logic [5:0] n_groups;
  logic [0:0] slot, rd_slot;
  logic busy, done, rd_en = 0, wide_group;
  logic [3:0] rd_row, rd_col;
  logic [31:0] rd_data;
  mx_group_t A [16][KG];
  mx_group_t W [16][KG];
  real ref_c [2][16][16];
  real ref_s [2][16][16];
  int checks = 0, failures = 0, wide_seen = 0;

  always #5 clk = ~clk;
  sa_tile #(.KG_MAX(32), .SLOTS(2)) dut (.*);

  always @(posedge clk) if (wide_group) wide_seen++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_and_run(int cmd, bit do_clear);
    int kind, expect_cycles, cycles;
    expect_cycles = 1 + 1 + 32 + 1 + 17;
    for (int g = 0; g < KG; g++) begin
      kind = $urandom_range(2);
      expect_cycles += (kind == 0) ? 4 : 16;
      for (int i = 0; i < 16; i++) begin
        A[i][g] = rand_group((kind == 2) ? MX9 : MX6, 118, 136);
        W[i][g] = rand_group((kind >= 1) ? MX9 : MX6, 118, 136);
      end
    end
    for (int g = 0; g < KG; g++)
      for (int i = 0; i < 16; i++) begin
        ld_en <= 1; ld_is_w <= 0; ld_lane <= i[3:0]; ld_addr <= g[4:0]; ld_data <= A[i][g];
        @(posedge clk);
        ld_is_w <= 1; ld_data <= W[i][g];
        @(posedge clk);
      end
    ld_en <= 0;
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        real r = do_clear ? 0.0 : ref_c[0][i][j];
        real s = do_clear ? 0.0 : ref_s[0][i][j];
        for (int g = 0; g < KG; g++) begin
          r += dot(A[i][g], W[j][g]);
          s += absdot(A[i][g], W[j][g]);
        end
        ref_c[cmd][i][j] = r; ref_s[cmd][i][j] = s;
      end
    start <= 1; n_groups <= 6'(KG); clear <= do_clear; drain <= 1; slot <= cmd[0:0];
    @(posedge clk);
    start <= 0;
    cycles = 0;
    while (!done) begin
      @(posedge clk);
      if (busy) cycles++;
    end
    checks++;
    if (cycles != expect_cycles) begin
      failures++; $display("FAIL cycles %0d expected %0d", cycles, expect_cycles);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load_and_run(0, 1);
    load_and_run(1, 0);
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          rd_en <= 1; rd_slot <= s[0:0]; rd_row <= i[3:0]; rd_col <= j[3:0];
          @(posedge clk);
          rd_en <= 0;
          @(negedge clk);
          checks++;
          if (!close(fp32_val(rd_data), ref_c[s][i][j], ref_s[s][i][j])) begin
            failures++;
            $display("FAIL slot %0d C[%0d][%0d] got %g exp %g", s, i, j, fp32_val(rd_data), ref_c[s][i][j]);
          end
        end
    checks++;
    if (wide_seen == 0) begin failures++; $display("FAIL no wide group"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
