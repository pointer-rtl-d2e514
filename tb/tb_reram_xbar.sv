// tb_reram_xbar -- programs a full 128x128 crossbar with random 2-bit cells
// and checks every column's ADC code for random input bit vectors against
// sum_i in[i]*G[i][j], one cycle after sample.
module tb_reram_xbar;
  localparam int R = 128, C = 128;
  logic clk = 0;
  logic prog_en = 0, sample = 0;
  logic [6:0] prow, pcol;
  logic [1:0] pval;
  logic [R-1:0] in_bits;
  logic [C-1:0][8:0] col_sum;
  logic [1:0] g [R][C];
  int checks = 0, failures = 0;

  reram_xbar #(.ROWS(R), .COLS(C), .CELL_BITS(2)) dut (
    .clk, .prog_en, .prog_row(prow), .prog_col(pcol), .prog_val(pval),
    .sample, .in_bits, .col_sum);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < R; i++)
      for (int j = 0; j < C; j++) begin
        g[i][j] = 2'($urandom);
        @(negedge clk); prog_en = 1; prow = 7'(i); pcol = 7'(j); pval = g[i][j];
      end
    @(negedge clk); prog_en = 0;
    for (int t = 0; t < 20; t++) begin
      logic [R-1:0] v;
      for (int i = 0; i < R; i++) v[i] = (t == 0) ? 1'b1 : 1'($urandom);
      in_bits = v;
      sample = 1;
      @(negedge clk); sample = 0;
      in_bits = '0;                    // output must hold the sampled value
      @(negedge clk);
      for (int j = 0; j < C; j++) begin
        int ex;
        ex = 0;
        for (int i = 0; i < R; i++) if (v[i]) ex += int'(g[i][j]);
        checks++;
        if (int'(col_sum[j]) != ex) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d col %0d got %0d exp %0d", t, j, col_sum[j], ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
