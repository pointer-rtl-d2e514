// tb_feature_buffer -- replays the three buffer examples of the
// architecture's worked example with a 3-vector buffer (12 words, 4-word
// slots): the index-order schedule must hit 1 of 9 fetches, the
// inter-layer-coordinated schedule 7 of 9, and the reordered schedule 9 of 9.
// Every fetched word is checked against the value written, DRAM contents are
// checked after write-through, a level-2 vector must not enter the buffer,
// and DRAM back-pressure is applied at random.
module tb_feature_buffer;
  import pointer_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  cfg_t cfg;
  logic rd_req = 0, wr_req = 0, rd_word_valid, busy, done;
  logic [1:0] rd_level, wr_level;
  idx_t rd_idx, wr_idx;
  logic [DIM_W-1:0] rd_len, wr_len, wr_pos;
  word_t rd_word, wr_word;
  logic dreq_v, dreq_r, dreq_we, drsp_v, stall = 0;
  logic [31:0] dreq_a;
  word_t dreq_d, drsp_d;
  logic [1:0][31:0] hit_cnt, miss_cnt;
  int checks = 0, failures = 0;

  feature_buffer #(.BUF_WORDS(12)) dut (.clk, .rst_n, .clear, .cfg,
    .rd_req, .rd_level, .rd_idx, .rd_len, .rd_word_valid, .rd_word,
    .wr_req, .wr_level, .wr_idx, .wr_len, .wr_pos, .wr_word, .busy, .done,
    .dram_req_valid(dreq_v), .dram_req_ready(dreq_r), .dram_req_we(dreq_we),
    .dram_req_addr(dreq_a), .dram_req_wdata(dreq_d),
    .dram_rsp_valid(drsp_v), .dram_rsp_data(drsp_d), .hit_cnt, .miss_cnt);
  dram_model #(.WORDS(4096), .LAT(3)) u_dram (.clk, .rst_n, .stall, .req_valid(dreq_v), .req_ready(dreq_r),
    .req_we(dreq_we), .req_addr(dreq_a), .req_wdata(dreq_d), .rsp_valid(drsp_v), .rsp_data(drsp_d));
  always #5 clk = ~clk;
  always @(negedge clk) stall <= 1'($urandom % 4 == 0);

  function automatic word_t val(int lvl, int p, int w);
    return word_t'(lvl * 4096 + p * 16 + w + 1);
  endfunction
  assign wr_word = val(int'(wr_level), int'(wr_idx), int'(wr_pos));

  task automatic produce(int p, int lvl = 1);
    @(negedge clk); wr_req = 1; wr_level = 2'(lvl); wr_idx = IDX_W'(p); wr_len = 4;
    @(negedge clk); wr_req = 0;
    while (!done) @(negedge clk);
  endtask
  task automatic fetch(int p, int lvl = 1);
    int n;
    @(negedge clk); rd_req = 1; rd_level = 2'(lvl); rd_idx = IDX_W'(p); rd_len = 4;
    @(negedge clk); rd_req = 0;
    n = 0;
    forever begin
      if (rd_word_valid) begin
        checks++;
        if (rd_word != val(lvl, p, n)) begin failures++; $display("FAIL word %0d of P%0d: %0d", n, p, rd_word); end
        n++;
      end
      if (done) break;
      @(negedge clk);
    end
    checks++;
    if (n != 4) begin failures++; $display("FAIL P%0d gave %0d words", p, n); end
  endtask
  task automatic start_run();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
  endtask
  task automatic expect_hits(string name, int h, int m);
    checks++;
    if (hit_cnt[1] != 32'(h) || miss_cnt[1] != 32'(m)) begin
      failures++; $display("FAIL %s: %0d hits %0d misses, expected %0d/%0d", name, hit_cnt[1], miss_cnt[1], h, m);
    end else $display("%s: hit rate %0d/9", name, h);
  endtask

  initial begin
    cfg = '0;
    cfg.slot_shift = 2;
    cfg.feat_base[0] = 32'h000;
    cfg.feat_base[1] = 32'h400;
    cfg.feat_base[2] = 32'h800;
    for (int p = 0; p < 16; p++) for (int w = 0; w < 4; w++) u_dram.mem[p * 4 + w] = val(0, p, w);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // (a) layer by layer, index order
    start_run();
    for (int p = 1; p <= 7; p++) produce(p);
    fetch(1); fetch(4); fetch(7); fetch(2); fetch(3); fetch(6); fetch(4); fetch(5); fetch(7);
    expect_hits("index order", 1, 8);
    // (b) inter-layer coordination
    start_run();
    produce(1); produce(4); produce(7); fetch(1); fetch(4); fetch(7);
    produce(2); produce(3); produce(6); fetch(2); fetch(3); fetch(6);
    produce(5); fetch(4); fetch(5); fetch(7);
    expect_hits("inter-layer", 7, 2);
    // (c) inter-layer coordination and intra-layer reordering
    start_run();
    produce(1); produce(4); produce(7); fetch(1); fetch(4); fetch(7);
    produce(5); fetch(4); fetch(5); fetch(7);
    produce(2); produce(3); produce(6); fetch(2); fetch(3); fetch(6);
    expect_hits("reordered", 9, 0);
    // write-through contents
    for (int p = 1; p <= 7; p++) for (int w = 0; w < 4; w++) begin
      checks++;
      if (u_dram.mem[32'h400 + p * 4 + w] != val(1, p, w)) begin failures++; $display("FAIL DRAM P%0d w%0d", p, w); end
    end
    // level 0: miss then hit; level 2: written to DRAM only
    fetch(9, 0); fetch(9, 0);
    checks++;
    if (hit_cnt[0] != 1 || miss_cnt[0] != 1) begin failures++; $display("FAIL level-0 counts"); end
    produce(3, 2);
    checks++;
    if (u_dram.mem[32'h800 + 12 + 2] != val(2, 3, 2)) begin failures++; $display("FAIL level-2 DRAM"); end
    fetch(9, 0);   // still cached: the level-2 write must not have evicted it
    checks++;
    if (hit_cnt[0] != 2) begin failures++; $display("FAIL level-2 vector entered the buffer"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
