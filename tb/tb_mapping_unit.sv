// tb_mapping_unit -- random clouds: the streamed FPS centres and every
// receptive field must equal the software reference; also a second layer
// run on a candidate subset (position -> point mapping), and the cycle count
// of one layer against (M-1)*(n+1) + M*(n+1) + small constant.
module tb_mapping_unit;
  import pointer_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 60;
  logic clk = 0, rst_n = 0, start = 0;
  logic [CNT_W-1:0] n_cand, n_centre;
  logic [4:0] k;
  idx_t cand_pos, cand_idx, da, db, c_idx, rf_centre;
  dist_t dd;
  logic c_valid, rf_valid, busy, done;
  logic [K_MAX-1:0][IDX_W-1:0] rf_neigh;
  int checks = 0, failures = 0;
  cloud cl;
  ilist cand, got_c, exp_c;
  int rf_n;
  int map_tab [N] = '{default: 0};

  mapping_unit #(.MAXN(64), .MAXC(32)) dut (.clk, .rst_n, .start, .n_cand, .n_centre, .k,
    .cand_pos, .cand_idx, .da_idx(da), .db_idx(db), .dd, .c_valid, .c_idx,
    .rf_valid, .rf_centre, .rf_neigh, .busy, .done);
  always #5 clk = ~clk;

  assign cand_idx = IDX_W'(map_tab[int'(cand_pos) % N]);
  always @* begin
    dd = '0;
    if (cl != null) dd = DIST_W'(cl.d(int'(da) % N, int'(db) % N));
  end

  always @(posedge clk) begin
    if (rst_n && c_valid) got_c.push_back(int'(c_idx));
    if (rst_n && rf_valid) begin
      ilist ex;
      ex = cl.knn(cand, int'(rf_centre), int'(k));
      checks++;
      if (int'(rf_centre) != exp_c[rf_n]) begin failures++; $display("FAIL rf centre %0d", rf_centre); end
      for (int e = 0; e < int'(k); e++) begin
        checks++;
        if (int'(rf_neigh[e]) != ex[e]) begin
          failures++;
          if (failures < 10) $display("FAIL centre %0d neighbour %0d: %0d exp %0d", rf_centre, e, rf_neigh[e], ex[e]);
        end
      end
      rf_n++;
    end
  end

  task automatic run(int n, int m, int kk, bit subset);
    int cyc;
    cand.delete();
    for (int p = 0; p < n; p++) begin
      map_tab[p] = subset ? (p * 7 + 3) % N : p;
      cand.push_back(map_tab[p]);
    end
    exp_c = cl.fps(cand, m);
    got_c.delete();
    rf_n = 0;
    n_cand = CNT_W'(n); n_centre = CNT_W'(m); k = 5'(kk);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (got_c != exp_c) begin failures++; $display("FAIL centres %p exp %p", got_c, exp_c); end
    checks++;
    if (rf_n != m) begin failures++; $display("FAIL %0d receptive fields", rf_n); end
    checks++;
    if (cyc < (m - 1) * (n + 1) + m * (n + 1) || cyc > (m - 1) * (n + 1) + m * (n + 1) + 4) begin
      failures++; $display("FAIL cycles %0d", cyc);
    end
  endtask

  initial begin
    cl = new(N, 2000);
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(60, 20, 16, 0);
    run(45, 12, 5, 1);
    cl = new(N, 200);       // small range: many equal distances
    run(60, 30, 16, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
