// tb_frontend -- a random cloud in the DRAM model (with back-pressure):
// the front-end must stream, in this order, the layer-1 receptive fields
// (FPS centres of all points with their k nearest points), the layer-2
// receptive fields (FPS of the layer-1 centres) and the topology-aware order
// of the layer-2 centres, all equal to the software reference.
module tb_frontend;
  import pointer_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 80, C1 = 24, C2 = 8, KK = 6;
  logic clk = 0, rst_n = 0, start = 0, stall = 0;
  cfg_t cfg;
  logic dreq_v, dreq_r, drsp_v;
  logic [31:0] dreq_a;
  word_t drsp_d;
  logic rf_valid, rf_layer, ord_valid, busy, done;
  idx_t rf_centre, ord_idx;
  logic [K_MAX-1:0][IDX_W-1:0] rf_neigh;
  int checks = 0, failures = 0;
  cloud cl;
  ilist all, c1, c2, ord;
  int n_rf [2] = '{0, 0};
  int n_ord = 0;
  logic seen_l2 = 0;

  frontend dut (.clk, .rst_n, .start, .cfg, .dram_req_valid(dreq_v), .dram_req_ready(dreq_r),
    .dram_req_addr(dreq_a), .dram_rsp_valid(drsp_v), .dram_rsp_data(drsp_d),
    .rf_valid, .rf_layer, .rf_centre, .rf_neigh, .ord_valid, .ord_idx, .busy, .done);
  dram_model #(.WORDS(4096), .LAT(5)) u_dram (.clk, .rst_n, .stall, .req_valid(dreq_v), .req_ready(dreq_r),
    .req_we(1'b0), .req_addr(dreq_a), .req_wdata(16'h0), .rsp_valid(drsp_v), .rsp_data(drsp_d));
  always #5 clk = ~clk;
  always @(negedge clk) stall <= 1'($urandom % 3 == 0);

  always @(posedge clk) if (rst_n) begin
    if (rf_valid) begin
      int l;
      ilist exn;
      l = int'(rf_layer);
      checks++;
      if (l == 0 && seen_l2) begin failures++; $display("FAIL layer-1 field after layer-2 fields"); end
      if (l == 1) seen_l2 <= 1;
      if (int'(rf_centre) != (l == 0 ? c1[n_rf[0]] : c2[n_rf[1]])) begin
        failures++; $display("FAIL layer %0d centre #%0d = %0d", l + 1, n_rf[l], rf_centre);
      end
      exn = cl.knn(l == 0 ? all : c1, int'(rf_centre), KK);
      for (int e = 0; e < KK; e++) begin
        checks++;
        if (int'(rf_neigh[e]) != exn[e]) begin failures++; $display("FAIL layer %0d centre %0d nb %0d", l + 1, rf_centre, e); end
      end
      n_rf[l]++;
    end
    if (ord_valid) begin
      checks++;
      if (int'(ord_idx) != ord[n_ord]) begin failures++; $display("FAIL order #%0d = %0d exp %0d", n_ord, ord_idx, ord[n_ord]); end
      n_ord++;
    end
  end

  initial begin
    cl = new(N, 30000);
    for (int i = 0; i < N; i++) begin
      all.push_back(i);
      u_dram.mem[100 + 3 * i]     = 16'(cl.x[i]);
      u_dram.mem[100 + 3 * i + 1] = 16'(cl.y[i]);
      u_dram.mem[100 + 3 * i + 2] = 16'(cl.z[i]);
    end
    c1  = cl.fps(all, C1);
    c2  = cl.fps(c1, C2);
    ord = cl.order(c2, 1);
    cfg = '0;
    cfg.n_points = N; cfg.n_c1 = C1; cfg.n_c2 = C2; cfg.k = KK;
    cfg.coord_base = 100; cfg.reorder_en = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (n_rf[0] != C1 || n_rf[1] != C2 || n_ord != C2) begin
      failures++; $display("FAIL counts %0d %0d %0d", n_rf[0], n_rf[1], n_ord);
    end
    checks++;
    if (u_dram.reads != 3 * N) begin failures++; $display("FAIL %0d coordinate reads", u_dram.reads); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
