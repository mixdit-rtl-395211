// tb_o_buffer -- writes whole rows into both slots of an output buffer bank,
// then reads single elements (slot, row, column) in random order and checks
// them against a model; the read data must appear one cycle after rd_en.
module tb_o_buffer;
  localparam int R = 16, C = 16, S = 2;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [0:0] wr_slot, rd_slot;
  logic [3:0] wr_row, rd_row, rd_col;
  logic [31:0] wr_data [C];
  logic [31:0] rd_data;
  logic [31:0] model [S][R][C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  o_buffer #(.ROWS(R), .COLS(C), .SLOTS(S)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, r, c;
    for (int sl = 0; sl < S; sl++)
      for (r = 0; r < R; r++) begin
        for (c = 0; c < C; c++) begin
          model[sl][r][c] = $urandom;
          wr_data[c] <= model[sl][r][c];
        end
        wr_en <= 1; wr_slot <= sl[0:0]; wr_row <= r[3:0];
        @(posedge clk);
      end
    wr_en <= 0;
    for (int n = 0; n < 300; n++) begin
      s = $urandom_range(S - 1); r = $urandom_range(R - 1); c = $urandom_range(C - 1);
      rd_en <= 1; rd_slot <= s[0:0]; rd_row <= r[3:0]; rd_col <= c[3:0];
      @(posedge clk);
      rd_en <= 0;
      @(negedge clk);
      checks++;
      if (rd_data != model[s][r][c]) begin failures++; $display("FAIL %0d %0d %0d", s, r, c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
