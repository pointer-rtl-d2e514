// tb_pointer_top -- end-to-end run of the accelerator at its default sizes
// (96 IMAs, 9 KB buffer) on a small random point cloud, checked against a
// complete software reference: sampling, neighbour search, last-layer order,
// the layer-interleaved schedule, a FIFO model of the buffer (exact hit and
// miss counts per level) and Q8.8 MLP arithmetic for every output vector in
// DRAM. The cloud is run twice, with topology-aware reordering and with
// index order. MLP layers span several 128x128 blocks in both directions.
// The buffer is given 512-word slots (9 slots) so that vectors get evicted.
// Counted mechanisms (each must occur): buffer hits, DRAM fetches on a miss,
// re-fetch of an evicted layer-1 vector, a layer-1 point shared by two
// receptive fields issued once, DRAM back-pressure, multi-block
// accumulation, ReLU clipping, and the reorder/index-order mode switch.
module tb_pointer_top;
  import pointer_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 64, C1 = 16, C2 = 6, KK = 4;
  localparam int LEN[3] = '{4, 32, 48};
  localparam int IND[6]  = '{4, 16, 16, 32, 160, 64};
  localparam int OUTD[6] = '{16, 16, 32, 160, 64, 48};
  localparam int BASE[6] = '{0, 1, 2, 3, 5, 7};
  localparam int CB = 'h0000, FB0 = 'h1000, FB1 = 'h2000, FB2 = 'h4000;
  localparam int SLOT_SHIFT = 9;

  logic clk = 0, rst_n = 0, cfg_we = 0, prog_en = 0, start = 0, busy, done, stall = 0;
  logic [5:0] cfg_addr;
  logic [31:0] cfg_wdata;
  logic [IMA_W-1:0] prog_ima;
  logic [6:0] prog_row, prog_col;
  word_t prog_w;
  logic dreq_v, dreq_r, dreq_we, drsp_v;
  logic [31:0] dreq_a;
  word_t dreq_d, drsp_d;
  logic [1:0][31:0] hit_cnt, miss_cnt, exec_cnt;

  pointer_top dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .prog_en, .prog_ima, .prog_row,
    .prog_col, .prog_w, .start, .busy, .done, .dram_req_valid(dreq_v), .dram_req_ready(dreq_r),
    .dram_req_we(dreq_we), .dram_req_addr(dreq_a), .dram_req_wdata(dreq_d),
    .dram_rsp_valid(drsp_v), .dram_rsp_data(drsp_d), .hit_cnt, .miss_cnt, .exec_cnt);
  dram_model #(.WORDS(1 << 15), .LAT(6)) u_dram (.clk, .rst_n, .stall, .req_valid(dreq_v), .req_ready(dreq_r),
    .req_we(dreq_we), .req_addr(dreq_a), .req_wdata(dreq_d), .rsp_valid(drsp_v), .rsp_data(drsp_d));
  always #5 clk = ~clk;
  always @(negedge clk) stall <= 1'($urandom % 5 == 0);

  int checks = 0, failures = 0;
  int ev_hit = 0, ev_miss = 0, ev_evicted = 0, ev_shared = 0, ev_stall = 0,
      ev_multiblock = 0, ev_relu = 0, ev_modes = 0;
  cloud cl;
  int w [6][][];
  int f0 [N][];
  ilist all, c1, c2;
  ilist rf [2][int];

  always @(posedge clk) if (rst_n && dreq_v && !dreq_r) ev_stall++;
  always @(posedge clk) if (rst_n && dut.u_ctl.state == dut.u_ctl.S_MVM_WAIT && dut.t_done && dut.u_ctl.rb != 0) ev_multiblock++;

  task automatic chk(string what, longint got, longint ex);
    checks++;
    if (got != ex) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, ex);
    end
  endtask

  task automatic wr_cfg(logic [5:0] a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // reference point execution: max over neighbours of MLP(sat16(Fj - Fi))
  function automatic void mlp_point(int layer, int ctr, ilist nb, ref int fin [int][], ref int wt [6][][],
                                    output int res [], inout int nrelu);
    res = new[LEN[layer + 1]];
    foreach (nb[n]) begin
      int v [];
      v = new[LEN[layer]];
      foreach (v[e]) v[e] = sat16(longint'(fin[nb[n]][e]) - longint'(fin[ctr][e]));
      for (int t = 0; t < 3; t++) begin
        int s, o [];
        s = 3 * layer + t;
        o = new[OUTD[s]];
        foreach (o[j]) begin
          longint acc;
          acc = 0;
          for (int i = 0; i < IND[s]; i++) acc += longint'(v[i]) * longint'(wt[s][i][j]);
          o[j] = sat16(acc >>> FRAC_BITS);
          if (o[j] < 0) begin o[j] = 0; nrelu++; end
        end
        v = o;
      end
      foreach (res[j]) res[j] = (n == 0 || v[j] > res[j]) ? v[j] : res[j];
    end
  endfunction

  task automatic run(bit reorder);
    ilist ord;
    int sched_l [$], sched_c [$];
    bit done1 [int];
    int f [2][int][];
    int hits [2] = '{0, 0}, misses [2] = '{0, 0};
    int fifo_l [$], fifo_c [$];
    int nslots, cyc;
    bit produced1 [int];

    ord = cl.order(c2, reorder);
    foreach (ord[o]) begin
      ilist rfo;
      rfo = rf[1][ord[o]];
      foreach (rfo[m]) begin
        int p;
        p = rfo[m];
        if (done1.exists(p)) ev_shared++;
        else begin done1[p] = 1; sched_l.push_back(0); sched_c.push_back(p); end
      end
      sched_l.push_back(1); sched_c.push_back(ord[o]);
    end
    // FIFO buffer model and expected outputs
    nslots = 4608 >> SLOT_SHIFT;
    for (int i = 0; i < N; i++) f[0][i] = f0[i];
    foreach (sched_c[x]) begin
      int L, c;
      ilist nb;
      L = sched_l[x]; c = sched_c[x];
      nb = rf[L][c];
      nb.push_front(c);
      foreach (nb[q]) begin
        int at;
        at = -1;
        foreach (fifo_c[s]) if (fifo_l[s] == L && fifo_c[s] == nb[q]) at = s;
        if (at >= 0) hits[L]++;
        else begin
          misses[L]++;
          if (L == 1 && produced1.exists(nb[q])) ev_evicted++;
          fifo_l.push_back(L); fifo_c.push_back(nb[q]);
          if (fifo_c.size() > nslots) begin void'(fifo_l.pop_front()); void'(fifo_c.pop_front()); end
        end
      end
      begin
        int r [];
        mlp_point(L, c, rf[L][c], f[L], w, r, ev_relu);
        if (L == 0) begin
          f[1][c] = r;
          produced1[c] = 1;
          fifo_l.push_back(1); fifo_c.push_back(c);
          if (fifo_c.size() > nslots) begin void'(fifo_l.pop_front()); void'(fifo_c.pop_front()); end
        end else begin
          f[0][1000 + c] = r;    // level-2 result kept aside
        end
      end
    end
    // clear level-1/2 areas so stale results cannot pass
    for (int a = FB1; a < FB2 + N * LEN[2]; a++) u_dram.mem[a] = 16'h5a5a;
    wr_cfg(REG_FLAGS, 32'(reorder));
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 2000000) begin @(negedge clk); cyc++; end
    $display("run reorder=%0d: %0d cycles, %0d executions, layer-1 fetch hits %0d/%0d, layer-2 fetch hits %0d/%0d",
      reorder, cyc, sched_c.size(), hit_cnt[0], hit_cnt[0] + miss_cnt[0], hit_cnt[1], hit_cnt[1] + miss_cnt[1]);
    chk("finished", done, 1);
    chk("SA1 executions", exec_cnt[0], done1.size());
    chk("SA2 executions", exec_cnt[1], C2);
    for (int L = 0; L < 2; L++) begin
      chk($sformatf("level %0d hits", L), hit_cnt[L], hits[L]);
      chk($sformatf("level %0d misses", L), miss_cnt[L], misses[L]);
    end
    ev_hit += int'(hit_cnt[0] + hit_cnt[1]);
    ev_miss += int'(miss_cnt[0] + miss_cnt[1]);
    foreach (f[1][c]) for (int j = 0; j < LEN[1]; j++)
      chk($sformatf("SA1 P%0d[%0d]", c, j), longint'(signed'(u_dram.mem[FB1 + c * LEN[1] + j])), f[1][c][j]);
    foreach (c2[q]) for (int j = 0; j < LEN[2]; j++)
      chk($sformatf("SA2 P%0d[%0d]", c2[q], j), longint'(signed'(u_dram.mem[FB2 + c2[q] * LEN[2] + j])), f[0][1000 + c2[q]][j]);
    ev_modes++;
  endtask

  initial begin
    cl = new(N, 20000);
    for (int i = 0; i < N; i++) begin
      all.push_back(i);
      u_dram.mem[CB + 3 * i] = 16'(cl.x[i]);
      u_dram.mem[CB + 3 * i + 1] = 16'(cl.y[i]);
      u_dram.mem[CB + 3 * i + 2] = 16'(cl.z[i]);
      f0[i] = new[LEN[0]];
      foreach (f0[i][e]) begin
        f0[i][e] = int'($urandom % 1024) - 512;      // +-2.0 in Q8.8
        u_dram.mem[FB0 + i * LEN[0] + e] = 16'(f0[i][e]);
      end
    end
    c1 = cl.fps(all, C1);
    c2 = cl.fps(c1, C2);
    foreach (c1[q]) rf[0][c1[q]] = cl.knn(all, c1[q], KK);
    foreach (c2[q]) rf[1][c2[q]] = cl.knn(c1, c2[q], KK);
    repeat (2) @(negedge clk);
    rst_n = 1;
    wr_cfg(REG_N_POINTS, N); wr_cfg(REG_N_C1, C1); wr_cfg(REG_N_C2, C2); wr_cfg(REG_K, KK);
    for (int l = 0; l < 3; l++) wr_cfg(REG_LEN0 + 6'(l), LEN[l]);
    wr_cfg(REG_COORD, CB); wr_cfg(REG_BASE0, FB0); wr_cfg(REG_BASE0 + 1, FB1); wr_cfg(REG_BASE0 + 2, FB2);
    wr_cfg(REG_SLOT, SLOT_SHIFT);
    for (int s = 0; s < 6; s++) begin
      mlp_cfg_t m;
      m.ima_base = IMA_W'(BASE[s]); m.out_dim = DIM_W'(OUTD[s]); m.in_dim = DIM_W'(IND[s]);
      wr_cfg(REG_MLP0 + 6'(s), 32'(m));
      w[s] = new[IND[s]];
      for (int i = 0; i < IND[s]; i++) begin
        w[s][i] = new[OUTD[s]];
        for (int j = 0; j < OUTD[s]; j++) begin
          w[s][i][j] = int'($urandom % 97) - 48;         // about +-0.19
          @(negedge clk);
          prog_en = 1;
          prog_ima = IMA_W'(BASE[s] + (i / 128) * ((OUTD[s] + 127) / 128) + j / 128);
          prog_row = 7'(i % 128); prog_col = 7'(j % 128); prog_w = word_t'(w[s][i][j]);
        end
      end
      @(negedge clk); prog_en = 0;
    end
    run(1);
    run(0);
    chk("mechanism: buffer hit", ev_hit > 0, 1);
    chk("mechanism: off-chip fetch on miss", ev_miss > 0, 1);
    chk("mechanism: evicted layer-1 vector fetched again", ev_evicted > 0, 1);
    chk("mechanism: shared layer-1 point issued once", ev_shared > 0, 1);
    chk("mechanism: DRAM back-pressure", ev_stall > 0, 1);
    chk("mechanism: multi-block MLP accumulation", ev_multiblock > 0, 1);
    chk("mechanism: ReLU clipping", ev_relu > 0, 1);
    chk("mechanism: both order modes", ev_modes, 2);
    $display("events: hits %0d misses %0d evicted-refetch %0d shared %0d stalls %0d multiblock %0d relu %0d modes %0d",
      ev_hit, ev_miss, ev_evicted, ev_shared, ev_stall, ev_multiblock, ev_relu, ev_modes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #80000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
