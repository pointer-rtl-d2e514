// tb_ima -- programs a 128x128 block of random signed 16-bit weights
// (including the extremes) and checks the 128 exact dot products for random
// signed inputs, and the 18-cycle latency from start to done.
module tb_ima;
  import pointer_pkg::*;
  localparam int R = 128, C = 128;
  logic clk = 0, rst_n = 0;
  logic prog_en = 0, start = 0, busy, done;
  logic [6:0] prow, pcol;
  word_t pw;
  logic [R-1:0][DATA_W-1:0] x;
  logic [C-1:0][ACC_W-1:0] y;
  shortint w [R][C];
  int checks = 0, failures = 0;

  ima dut (.clk, .rst_n, .prog_en, .prog_row(prow), .prog_col(pcol), .prog_w(pw),
           .start, .x, .busy, .done, .y);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < R; i++)
      for (int j = 0; j < C; j++) begin
        w[i][j] = (j == 0) ? -32768 : (j == 1) ? 32767 : shortint'($urandom);
        @(negedge clk); prog_en = 1; prow = 7'(i); pcol = 7'(j); pw = w[i][j];
      end
    @(negedge clk); prog_en = 0;
    for (int t = 0; t < 12; t++) begin
      int lat;
      shortint xs [R];
      for (int i = 0; i < R; i++)
        x[i] = (t == 0) ? 16'h8000 : (t == 1) ? 16'h7fff : (t < 6) ? 16'($urandom) : 16'($signed(16'($urandom)) >>> 8);
      for (int i = 0; i < R; i++) xs[i] = shortint'(x[i]);
      start = 1;
      @(negedge clk); start = 0;
      x = '0;
      lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 18) begin failures++; $display("FAIL latency %0d", lat); end
      for (int j = 0; j < C; j++) begin
        longint ex;
        ex = 0;
        for (int i = 0; i < R; i++)
          ex += longint'(w[i][j]) * longint'(xs[i]);
        checks++;
        if (longint'(signed'(y[j])) != ex) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d col %0d got %0d exp %0d", t, j, signed'(y[j]), ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #3000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
