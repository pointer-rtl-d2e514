// tb_controller -- back-end execution of tokens checked against Q8.8 MLP
// arithmetic. The controller runs with the real feature buffer (a small one
// of two 32-word slots, so vectors are evicted), a reduced ReRAM tile of
// 8 IMAs and the DRAM model. The testbench plays the front-end and the
// scheduler: it answers fe_start with fe_done, offers a list of tokens on
// the valid/ready port (with random gaps) and pulses sch_done right after
// the last token is taken, while that token is still being computed.
// SA1 tokens are computed from random input vectors; SA2 tokens then use
// the SA1 results. MLP layers cover two column blocks (4x160) and two row
// blocks (160x16), so partial sums across IMAs are exercised. Every word
// written to DRAM at level 1 and 2 is compared with the reference, as are
// the execution counters and the token count.
module tb_controller;
  import pointer_pkg::*;
  import tb_ref_pkg::*;
  localparam int KK = 3, NT1 = 6, NT2 = 3;
  localparam int LEN[3] = '{4, 32, 24};
  localparam int IND[6]  = '{4, 160, 16, 32, 16, 16};
  localparam int OUTD[6] = '{160, 16, 32, 16, 16, 24};
  localparam int BASE[6] = '{0, 2, 4, 5, 6, 7};
  localparam int FB0 = 'h100, FB1 = 'h400, FB2 = 'h800;

  logic clk = 0, rst_n = 0, start = 0, busy, done, stall = 0;
  cfg_t cfg;
  logic fe_start, fe_done = 0, sch_clear, sch_go, sch_done = 0, tok_valid = 0, tok_ready;
  token_t tok;
  logic buf_clear, rd_req, rd_word_valid, wr_req, buf_done, buf_busy;
  logic [1:0] rd_level, wr_level;
  idx_t rd_idx, wr_idx;
  logic [DIM_W-1:0] rd_len, wr_len, wr_pos;
  word_t rd_word, wr_word;
  logic t_start, t_done, t_busy, prog_en = 0;
  logic [IMA_W-1:0] t_sel, prog_ima;
  logic [6:0] prog_row, prog_col;
  word_t prog_w;
  logic [XB_ROWS-1:0][DATA_W-1:0] t_x;
  logic [XB_COLS-1:0][ACC_W-1:0] t_y;
  logic [1:0][31:0] exec_cnt, hit_cnt, miss_cnt;
  logic dreq_v, dreq_r, dreq_we, drsp_v;
  logic [31:0] dreq_a;
  word_t dreq_d, drsp_d;

  controller dut (.clk, .rst_n, .start, .cfg, .busy, .done, .fe_start, .fe_done, .sch_clear, .sch_go,
    .sch_done, .tok_valid, .tok_ready, .tok, .buf_clear, .rd_req, .rd_level, .rd_idx, .rd_len,
    .rd_word_valid, .rd_word, .wr_req, .wr_level, .wr_idx, .wr_len, .wr_pos, .wr_word, .buf_done,
    .t_start, .t_sel, .t_x, .t_done, .t_y, .exec_cnt);
  feature_buffer #(.BUF_WORDS(64), .MAX_SLOTS(8)) u_buf (.clk, .rst_n, .clear(buf_clear), .cfg,
    .rd_req, .rd_level, .rd_idx, .rd_len, .rd_word_valid, .rd_word, .wr_req, .wr_level, .wr_idx,
    .wr_len, .wr_pos, .wr_word, .busy(buf_busy), .done(buf_done), .dram_req_valid(dreq_v),
    .dram_req_ready(dreq_r), .dram_req_we(dreq_we), .dram_req_addr(dreq_a), .dram_req_wdata(dreq_d),
    .dram_rsp_valid(drsp_v), .dram_rsp_data(drsp_d), .hit_cnt, .miss_cnt);
  reram_tile #(.NIMA(8)) u_tile (.clk, .rst_n, .prog_en, .prog_ima, .prog_row, .prog_col, .prog_w,
    .start(t_start), .sel(t_sel), .x(t_x), .busy(t_busy), .done(t_done), .y(t_y));
  dram_model #(.WORDS(4096), .LAT(3)) u_dram (.clk, .rst_n, .stall, .req_valid(dreq_v), .req_ready(dreq_r),
    .req_we(dreq_we), .req_addr(dreq_a), .req_wdata(dreq_d), .rsp_valid(drsp_v), .rsp_data(drsp_d));
  always #5 clk = ~clk;
  always @(negedge clk) stall <= 1'($urandom % 4 == 0);

  int checks = 0, failures = 0, taken = 0, dones = 0, evict = 0;
  int w [6][][];
  int f [3][int][];
  token_t toks [$];
  always @(posedge clk) if (rst_n && done) dones++;
  always @(posedge clk) if (rst_n && tok_valid && tok_ready) taken++;

  task automatic chk(string what, longint got, longint ex);
    checks++;
    if (got != ex) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, ex);
    end
  endtask

  function automatic void mlp_point(int layer, int ctr, int nb [], ref int fin [int][], ref int wt [6][][],
                                    output int res []);
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
          if (o[j] < 0) o[j] = 0;
        end
        v = o;
      end
      foreach (res[j]) res[j] = (n == 0 || v[j] > res[j]) ? v[j] : res[j];
    end
  endfunction

  // front-end stand-in
  initial forever begin
    @(posedge clk);
    if (rst_n && fe_start) begin
      repeat (5) @(negedge clk);
      fe_done = 1; @(negedge clk); fe_done = 0;
    end
  end

  initial begin
    int c1 [NT1];
    cfg = '0;
    cfg.k = 5'(KK);
    for (int l = 0; l < 3; l++) cfg.feat_len[l] = DIM_W'(LEN[l]);
    cfg.feat_base[0] = FB0; cfg.feat_base[1] = FB1; cfg.feat_base[2] = FB2;
    cfg.slot_shift = 4'd5;
    for (int s = 0; s < 6; s++) begin
      mlp_cfg_t m;
      m.ima_base = IMA_W'(BASE[s]); m.out_dim = DIM_W'(OUTD[s]); m.in_dim = DIM_W'(IND[s]);
      cfg.mlp[s] = m;
    end
    for (int i = 0; i < 16; i++) begin
      f[0][i] = new[LEN[0]];
      foreach (f[0][i][e]) begin
        f[0][i][e] = int'($urandom % 2048) - 1024;
        u_dram.mem[FB0 + i * LEN[0] + e] = 16'(f[0][i][e]);
      end
    end
    for (int a = FB1; a < 4096; a++) u_dram.mem[a] = 16'h5a5a;
    // tokens: SA1 centres 0..5 over random neighbours, then SA2 over those
    for (int t = 0; t < NT1; t++) begin
      token_t k;
      int nb [];
      k = '0; k.layer = 0; k.centre = idx_t'(t * 2); c1[t] = t * 2;
      nb = new[KK];
      foreach (nb[q]) begin nb[q] = int'($urandom % 16); k.neigh[q] = idx_t'(nb[q]); end
      toks.push_back(k);
      mlp_point(0, t * 2, nb, f[0], w, f[1][t * 2]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      w[s] = new[IND[s]];
      for (int i = 0; i < IND[s]; i++) begin
        w[s][i] = new[OUTD[s]];
        for (int j = 0; j < OUTD[s]; j++) begin
          w[s][i][j] = int'($urandom % 129) - 64;
          @(negedge clk);
          prog_en = 1;
          prog_ima = IMA_W'(BASE[s] + (i / 128) * ((OUTD[s] + 127) / 128) + j / 128);
          prog_row = 7'(i % 128); prog_col = 7'(j % 128); prog_w = word_t'(w[s][i][j]);
        end
      end
    end
    @(negedge clk); prog_en = 0;
    // reference for SA1 now that weights exist
    foreach (toks[t]) begin
      int nb [];
      nb = new[KK];
      foreach (nb[q]) nb[q] = int'(toks[t].neigh[q]);
      mlp_point(0, int'(toks[t].centre), nb, f[0], w, f[1][int'(toks[t].centre)]);
    end
    for (int t = 0; t < NT2; t++) begin
      token_t k;
      int nb [];
      k = '0; k.layer = 1; k.centre = idx_t'(c1[t * 2]);
      nb = new[KK];
      foreach (nb[q]) begin nb[q] = c1[$urandom % NT1]; k.neigh[q] = idx_t'(nb[q]); end
      toks.push_back(k);
      mlp_point(1, c1[t * 2], nb, f[1], w, f[2][c1[t * 2]]);
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    chk("busy after start", busy, 1);
    wait (sch_go);
    @(negedge clk);
    foreach (toks[t]) begin
      repeat ($urandom % 3) @(negedge clk);
      tok = toks[t]; tok_valid = 1;
      #1;
      while (!tok_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      tok_valid = 0;
    end
    sch_done = 1; @(negedge clk); sch_done = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    chk("tokens taken", taken, NT1 + NT2);
    chk("done pulses", dones, 1);
    chk("SA1 executions", exec_cnt[0], NT1);
    chk("SA2 executions", exec_cnt[1], NT2);
    chk("level 0 fetches", hit_cnt[0] + miss_cnt[0], NT1 * (KK + 1));
    chk("level 1 fetches", hit_cnt[1] + miss_cnt[1], NT2 * (KK + 1));
    chk("some level 1 misses (evictions)", miss_cnt[1] > 0, 1);
    foreach (f[1][c]) for (int j = 0; j < LEN[1]; j++)
      chk($sformatf("SA1 P%0d[%0d]", c, j), longint'(signed'(u_dram.mem[FB1 + c * LEN[1] + j])), f[1][c][j]);
    foreach (f[2][c]) for (int j = 0; j < LEN[2]; j++)
      chk($sformatf("SA2 P%0d[%0d]", c, j), longint'(signed'(u_dram.mem[FB2 + c * LEN[2] + j])), f[2][c][j]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
