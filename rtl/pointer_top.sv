// pointer_top -- ReRAM-based point-cloud recognition accelerator for
// two-layer PointNet++ networks.
//
// Front-end (point mapping): coordinate load, farthest point sampling and
// neighbour search of both set-abstraction layers, and the topology-aware
// order of the last layer's centres. Back-end (feature processing): the
// scheduler turns receptive fields and order into a layer-interleaved
// execution sequence, the controller executes it point by point with the
// feature buffer, the compute unit and the ReRAM tile that holds all MLP
// weights. Configuration registers hold the network shape.
//
// Ports:
//   cfg_*      host register writes (map in pointer_pkg), one per cycle;
//   prog_*     ReRAM weight programming, one 16-bit weight per cycle, to
//              IMA prog_ima, row prog_row, column prog_col; only while idle;
//   start      pulse to run one point cloud; busy while running, done pulse;
//   dram_*     off-chip DRAM, one 16-bit word per request, held until
//              dram_req_ready, reads answered in order on dram_rsp_valid;
//              the front-end owns it while it runs, the buffer otherwise;
//   hit_cnt / miss_cnt per feature level (0 input, 1 layer-1 output) and
//   exec_cnt per layer: performance counters, cleared by start.
// DRAM layout: coordinates x,y,z at coord_base + 3*i; level-L vector of
// point i at feat_base[L] + i*feat_len[L]. Results are the level-2 vectors.
module pointer_top
  import pointer_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [5:0]           cfg_addr,
  input  logic [31:0]          cfg_wdata,
  input  logic                 prog_en,
  input  logic [IMA_W-1:0]     prog_ima,
  input  logic [6:0]           prog_row,
  input  logic [6:0]           prog_col,
  input  word_t                prog_w,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic                 dram_req_valid,
  input  logic                 dram_req_ready,
  output logic                 dram_req_we,
  output logic [ADDR_W-1:0]    dram_req_addr,
  output word_t                dram_req_wdata,
  input  logic                 dram_rsp_valid,
  input  word_t                dram_rsp_data,
  output logic [1:0][31:0]     hit_cnt,
  output logic [1:0][31:0]     miss_cnt,
  output logic [1:0][31:0]     exec_cnt
);
  cfg_t cfg;

  config_regs u_cfg (.clk, .rst_n, .wr_en(cfg_we), .wr_addr(cfg_addr), .wr_data(cfg_wdata), .cfg);

  // ---------------- front-end ----------------
  logic fe_start, fe_busy, fe_done;
  logic fe_req_valid;
  logic [ADDR_W-1:0] fe_req_addr;
  logic rf_valid, rf_layer, ord_valid;
  idx_t rf_centre, ord_idx;
  logic [K_MAX-1:0][IDX_W-1:0] rf_neigh;

  frontend u_fe (
    .clk, .rst_n, .start(fe_start), .cfg,
    .dram_req_valid (fe_req_valid),
    .dram_req_ready (dram_req_ready),
    .dram_req_addr  (fe_req_addr),
    .dram_rsp_valid (dram_rsp_valid && fe_busy),
    .dram_rsp_data  (dram_rsp_data),
    .rf_valid, .rf_layer, .rf_centre, .rf_neigh, .ord_valid, .ord_idx,
    .busy (fe_busy), .done (fe_done)
  );

  // ---------------- scheduler ----------------
  logic   sch_clear, sch_go, sch_done, sch_busy, tok_valid, tok_ready;
  token_t tok;

  scheduler u_sch (
    .clk, .rst_n, .clear(sch_clear), .k(cfg.k),
    .rf_valid, .rf_layer, .rf_centre, .rf_neigh, .ord_valid, .ord_idx,
    .go(sch_go), .tok_valid, .tok_ready, .tok, .busy(sch_busy), .done(sch_done)
  );

  // ---------------- feature buffer ----------------
  logic buf_clear, rd_req, rd_word_valid, wr_req, buf_busy, buf_done;
  logic [1:0] rd_level, wr_level;
  idx_t rd_idx, wr_idx;
  logic [DIM_W-1:0] rd_len, wr_len, wr_pos;
  word_t rd_word, wr_word;
  logic be_req_valid, be_req_we;
  logic [ADDR_W-1:0] be_req_addr;
  word_t be_req_wdata;

  feature_buffer u_buf (
    .clk, .rst_n, .clear(buf_clear), .cfg,
    .rd_req, .rd_level, .rd_idx, .rd_len, .rd_word_valid, .rd_word,
    .wr_req, .wr_level, .wr_idx, .wr_len, .wr_pos, .wr_word,
    .busy (buf_busy), .done (buf_done),
    .dram_req_valid (be_req_valid),
    .dram_req_ready (dram_req_ready && !fe_busy),
    .dram_req_we    (be_req_we),
    .dram_req_addr  (be_req_addr),
    .dram_req_wdata (be_req_wdata),
    .dram_rsp_valid (dram_rsp_valid && !fe_busy),
    .dram_rsp_data  (dram_rsp_data),
    .hit_cnt, .miss_cnt
  );

  // ---------------- ReRAM tile ----------------
  logic t_start, t_busy, t_done;
  logic [IMA_W-1:0] t_sel;
  logic [XB_ROWS-1:0][DATA_W-1:0] t_x;
  logic [XB_COLS-1:0][ACC_W-1:0]  t_y;

  reram_tile u_tile (
    .clk, .rst_n,
    .prog_en (prog_en && !busy), .prog_ima, .prog_row, .prog_col, .prog_w,
    .start (t_start), .sel (t_sel), .x (t_x),
    .busy (t_busy), .done (t_done), .y (t_y)
  );

  // ---------------- main controller ----------------
  controller u_ctl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .fe_start, .fe_done, .sch_clear, .sch_go, .sch_done, .tok_valid, .tok_ready, .tok,
    .buf_clear, .rd_req, .rd_level, .rd_idx, .rd_len, .rd_word_valid, .rd_word,
    .wr_req, .wr_level, .wr_idx, .wr_len, .wr_pos, .wr_word, .buf_done,
    .t_start, .t_sel, .t_x, .t_done, .t_y, .exec_cnt
  );

  // ---------------- DRAM: front-end while it runs, buffer otherwise ----------------
  assign dram_req_valid = fe_busy ? fe_req_valid : be_req_valid;
  assign dram_req_we    = !fe_busy && be_req_we;
  assign dram_req_addr  = fe_busy ? fe_req_addr : be_req_addr;
  assign dram_req_wdata = be_req_wdata;

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(fe_busy && buf_busy));
endmodule
