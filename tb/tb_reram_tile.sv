// tb_reram_tile -- programs different weight blocks into several IMAs of a
// small tile and checks that each product is routed to and from the IMA
// named by sel (an identity block, a scaled identity, random blocks).
module tb_reram_tile;
  import pointer_pkg::*;
  localparam int NI = 4, R = 128, C = 128;
  logic clk = 0, rst_n = 0;
  logic prog_en = 0, start = 0, busy, done;
  logic [IMA_W-1:0] pima, sel;
  logic [6:0] prow, pcol;
  word_t pw;
  logic [R-1:0][DATA_W-1:0] x;
  logic [C-1:0][ACC_W-1:0] y;
  shortint w [NI][R][C];
  int checks = 0, failures = 0;

  reram_tile #(.NIMA(NI)) dut (.clk, .rst_n, .prog_en, .prog_ima(pima), .prog_row(prow),
    .prog_col(pcol), .prog_w(pw), .start, .sel, .x, .busy, .done, .y);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < NI; m++)
      for (int i = 0; i < R; i++)
        for (int j = 0; j < C; j++) begin
          w[m][i][j] = (m == 0) ? shortint'(i == j) : (m == 1) ? shortint'((i == j) ? 3 : 0) : shortint'($urandom);
          @(negedge clk); prog_en = 1; pima = IMA_W'(m); prow = 7'(i); pcol = 7'(j); pw = w[m][i][j];
        end
    @(negedge clk); prog_en = 0;
    for (int t = 0; t < 12; t++) begin
      shortint xs [R];
      int m, lat;
      m = (t < NI) ? t : int'($urandom % NI);
      for (int i = 0; i < R; i++) begin xs[i] = shortint'($urandom); x[i] = xs[i]; end
      sel = IMA_W'(m);
      start = 1;
      @(negedge clk); start = 0;
      sel = '0;
      lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      for (int j = 0; j < C; j++) begin
        longint ex;
        ex = 0;
        for (int i = 0; i < R; i++) ex += longint'(w[m][i][j]) * longint'(xs[i]);
        checks++;
        if (longint'(signed'(y[j])) != ex) begin
          failures++;
          if (failures < 10) $display("FAIL ima %0d col %0d got %0d exp %0d", m, j, signed'(y[j]), ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
