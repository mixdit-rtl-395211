// tb_mx_systolic_array -- self-checking test of the 16x16 PE array.
// Each test runs KG random K-groups (random mix of MX6xMX6, MX6xMX9 and
// MX9xMX9) through all rows and columns at once, waits for the wavefront,
// drains, and compares all 256 binary32 results with floating-point dot
// products. It also checks the drain order (rows 15..0, 16 valid cycles) and
// that 'clear' zeroes the accumulators between tests.
module tb_mx_systolic_array;
  import mixdit_pkg::*;
  import tb_mx_pkg::*;

  localparam int N = 16, KG = 6;
  logic clk = 0, rst_n = 0, clear = 0, drain_start = 0;
  pe_beat_t a_row [N];
  pe_beat_t w_col [N];
  logic out_valid, draining;
  logic [3:0] out_row_idx;
  logic [31:0] out_row_data [N];
  mx_group_t A [N][KG];
  mx_group_t W [N][KG];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  mx_systolic_array #(.N(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_v, scale;
    int  kind, nb, rows_seen, expect_row;
    bit  wide;
    for (int i = 0; i < N; i++) begin a_row[i] = '0; w_col[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int test = 0; test < 4; test++) begin
      clear <= 1; @(posedge clk); clear <= 0;
      for (int g = 0; g < KG; g++) begin
        kind = $urandom_range(2);
        for (int i = 0; i < N; i++) begin
          A[i][g] = rand_group((kind == 2) ? MX9 : MX6, 118, 136);
          W[i][g] = rand_group((kind >= 1) ? MX9 : MX6, 118, 136);
        end
      end
      for (int g = 0; g < KG; g++) begin
        wide = (A[0][g].prec == MX9) || (W[0][g].prec == MX9);
        nb = wide ? 16 : 4;
        for (int b = 0; b < nb; b++) begin
          for (int i = 0; i < N; i++) begin
            a_row[i] <= beat_of(A[i][g], b, wide, nb);
            w_col[i] <= beat_of(W[i][g], b, wide, nb);
          end
          @(posedge clk);
        end
      end
      for (int i = 0; i < N; i++) begin a_row[i] <= '0; w_col[i] <= '0; end
      repeat (2 * N + 1) @(posedge clk);
      drain_start <= 1; @(posedge clk); drain_start <= 0;
      rows_seen = 0; expect_row = N - 1;
      for (int c = 0; c < N + 4; c++) begin
        @(negedge clk);
        if (out_valid) begin
          checks++;
          if (int'(out_row_idx) != expect_row) begin failures++; $display("FAIL row order"); end
          for (int j = 0; j < N; j++) begin
            ref_v = 0.0; scale = 0.0;
            for (int g = 0; g < KG; g++) begin
              ref_v += dot(A[out_row_idx][g], W[j][g]);
              scale += absdot(A[out_row_idx][g], W[j][g]);
            end
            checks++;
            if (!close(fp32_val(out_row_data[j]), ref_v, scale)) begin
              failures++;
              $display("FAIL test %0d C[%0d][%0d] got %g exp %g", test, out_row_idx, j,
                       fp32_val(out_row_data[j]), ref_v);
            end
          end
          rows_seen++; expect_row--;
        end
      end
      checks++;
      if (rows_seen != N) begin failures++; $display("FAIL drain rows %0d", rows_seen); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
