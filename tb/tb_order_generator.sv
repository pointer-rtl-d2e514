// tb_order_generator -- random sets of centres: the streamed order must be
// the greedy nearest-next order of the software reference (reorder_en = 1)
// and the ascending-index order (reorder_en = 0), and must take n*(n+1)
// cycles plus a small constant.
module tb_order_generator;
  import pointer_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 200;
  logic clk = 0, rst_n = 0, start = 0, reorder_en;
  logic [CNT_W-1:0] n;
  idx_t pos, cidx, da, db, o_idx;
  dist_t dd;
  logic o_valid, busy, done;
  int checks = 0, failures = 0;
  cloud cl;
  ilist cen, got;
  int cen_tab [64] = '{default: 0};

  order_generator #(.MAXC(64)) dut (.clk, .rst_n, .start, .n, .reorder_en, .pos, .cidx,
    .da_idx(da), .db_idx(db), .dd, .o_valid, .o_idx, .busy, .done);
  always #5 clk = ~clk;

  assign cidx = IDX_W'(cen_tab[int'(pos) % 64]);
  always @* begin
    dd = '0;
    if (cl != null) dd = DIST_W'(cl.d(int'(da) % N, int'(db) % N));
  end
  always @(posedge clk) if (rst_n && o_valid) got.push_back(int'(o_idx));

  task automatic run(int m, bit re);
    ilist ex;
    int cyc;
    cen.delete();
    for (int p = 0; p < m; p++) begin
      int c;
      do c = int'($urandom % N); while (c inside {cen});
      cen.push_back(c);
      cen_tab[p] = c;
    end
    ex = cl.order(cen, re);
    got.delete();
    n = CNT_W'(m); reorder_en = re;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (got != ex) begin failures++; $display("FAIL order %p\n     expected %p", got, ex); end
    checks++;
    if (cyc < m * (m + 1) || cyc > m * (m + 1) + 3) begin failures++; $display("FAIL cycles %0d", cyc); end
  endtask

  initial begin
    cl = new(N, 4000);
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(20, 1); run(20, 0); run(64, 1); run(1, 1); run(33, 0); run(40, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
