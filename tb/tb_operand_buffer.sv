// tb_operand_buffer -- writes random MX groups to every lane and address of an
// operand buffer, reads whole words back and checks every lane, and checks
// that the registered read output holds its value while rd_en is low.
module tb_operand_buffer;
  import mixdit_pkg::*;
  import tb_mx_pkg::*;

  localparam int L = 16, D = 8;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [$clog2(L)-1:0] wr_lane;
  logic [$clog2(D)-1:0] wr_addr, rd_addr;
  mx_group_t wr_data;
  mx_group_t rd_data [L];
  mx_group_t model [D][L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  operand_buffer #(.LANES_N(L), .DEPTH(D)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    for (int aa = 0; aa < D; aa++)
      for (int l = 0; l < L; l++) begin
        model[aa][l] = rand_group(($urandom_range(1) != 0) ? MX9 : MX6, 100, 150);
        wr_en <= 1; wr_lane <= l[3:0]; wr_addr <= aa[2:0]; wr_data <= model[aa][l];
        @(posedge clk);
      end
    wr_en <= 0;
    for (int r = 0; r < 3 * D; r++) begin
      a = $urandom_range(D - 1);
      rd_en <= 1; rd_addr <= a[2:0];
      @(posedge clk);
      rd_en <= 0;
      @(posedge clk);          // output must hold without rd_en
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rd_data[l] != model[a][l]) begin failures++; $display("FAIL a=%0d l=%0d", a, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
