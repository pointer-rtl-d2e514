// frontend -- point-mapping front-end.
//
// Runs the point-mapping work of both set-abstraction layers and produces
// everything the back-end scheduler needs:
//   1. LOAD   reads x, y, z of every input point from DRAM (3 words per
//             point at coord_base) into an on-chip coordinate store;
//   2. MAP1   mapping unit on all n_points: n_c1 centres + receptive fields;
//   3. MAP2   mapping unit on the n_c1 layer-1 centres: n_c2 centres +
//             receptive fields;
//   4. ORDER  order generator on the n_c2 layer-2 centres.
// One distance unit is shared: the mapping unit uses it in MAP1/MAP2, the
// order generator in ORDER. Receptive fields leave on rf_* (rf_layer 0 for
// SA layer 1, 1 for SA layer 2), the last layer's order on ord_*. Points are
// named by their index in the input cloud throughout.
//
// DRAM port: one 16-bit word per request, requests accepted when
// dram_req_ready, read data returned in order on dram_rsp_valid, any latency.
// start begins the sequence, done pulses once after ORDER. The split into
// mapping unit, order generator and shared distance unit follows the
// architecture's block diagram; the coordinate store, the strict phase
// sequence and the DRAM layout are this design's.
module frontend
  import pointer_pkg::*;
#(
  parameter int unsigned MAXN  = MAX_POINTS,
  parameter int unsigned MAXC1 = 512,
  parameter int unsigned MAXC2 = 128,
  parameter int unsigned K     = K_MAX
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  cfg_t                     cfg,
  output logic                     dram_req_valid,
  input  logic                     dram_req_ready,
  output logic [ADDR_W-1:0]        dram_req_addr,
  input  logic                     dram_rsp_valid,
  input  word_t                    dram_rsp_data,
  output logic                     rf_valid,
  output logic                     rf_layer,
  output idx_t                     rf_centre,
  output logic [K-1:0][IDX_W-1:0]  rf_neigh,
  output logic                     ord_valid,
  output idx_t                     ord_idx,
  output logic                     busy,
  output logic                     done
);
  typedef enum logic [2:0] {P_IDLE, P_LOAD, P_MAP1, P_MAP2, P_ORDER} phase_e;
  phase_e phase;

  coord_t cx [MAXN];
  coord_t cy [MAXN];
  coord_t cz [MAXN];
  idx_t   c1_list [MAXC1];
  idx_t   c2_list [MAXC2];

  // ---------------- coordinate load ----------------
  logic [CNT_W+1:0] n_words, issued, recv;
  idx_t             rpt;
  logic [1:0]       rcomp;
  assign n_words        = (CNT_W+2)'(cfg.n_points) * 3;
  assign dram_req_valid = phase == P_LOAD && issued != n_words;
  assign dram_req_addr  = cfg.coord_base + ADDR_W'(issued);

  // ---------------- mapping unit ----------------
  logic  mu_start, mu_busy, mu_done, mu_cv, mu_rfv;
  idx_t  mu_pos, mu_cand, mu_da, mu_db, mu_cidx, mu_rfc;
  logic [K-1:0][IDX_W-1:0] mu_rfn;
  logic [CNT_W-1:0] c_cnt;
  dist_t dd;
  idx_t  da, db;

  assign mu_cand = (phase == P_MAP1) ? mu_pos : c1_list[mu_pos[$clog2(MAXC1)-1:0]];

  mapping_unit #(.MAXN(MAXN), .MAXC(MAXC1), .K(K)) u_map (
    .clk, .rst_n,
    .start    (mu_start),
    .n_cand   (phase == P_MAP1 ? cfg.n_points : cfg.n_c1),
    .n_centre (phase == P_MAP1 ? cfg.n_c1 : cfg.n_c2),
    .k        (cfg.k),
    .cand_pos (mu_pos),
    .cand_idx (mu_cand),
    .da_idx   (mu_da),
    .db_idx   (mu_db),
    .dd       (dd),
    .c_valid  (mu_cv),
    .c_idx    (mu_cidx),
    .rf_valid (mu_rfv),
    .rf_centre(mu_rfc),
    .rf_neigh (mu_rfn),
    .busy     (mu_busy),
    .done     (mu_done)
  );

  // ---------------- order generator ----------------
  logic og_start, og_busy, og_done;
  idx_t og_pos, og_da, og_db;

  order_generator #(.MAXC(MAXC2)) u_order (
    .clk, .rst_n,
    .start      (og_start),
    .n          (cfg.n_c2),
    .reorder_en (cfg.reorder_en),
    .pos        (og_pos),
    .cidx       (c2_list[og_pos[$clog2(MAXC2)-1:0]]),
    .da_idx     (og_da),
    .db_idx     (og_db),
    .dd         (dd),
    .o_valid    (ord_valid),
    .o_idx      (ord_idx),
    .busy       (og_busy),
    .done       (og_done)
  );

  // ---------------- shared distance unit ----------------
  assign da = (phase == P_ORDER) ? og_da : mu_da;
  assign db = (phase == P_ORDER) ? og_db : mu_db;

  distance_calc u_dist (
    .a_x (cx[da]), .a_y (cy[da]), .a_z (cz[da]),
    .b_x (cx[db]), .b_y (cy[db]), .b_z (cz[db]),
    .d   (dd)
  );

  assign rf_valid  = mu_rfv;
  assign rf_layer  = phase == P_MAP2;
  assign rf_centre = mu_rfc;
  assign rf_neigh  = mu_rfn;
  assign busy      = phase != P_IDLE;

  // ---------------- phase sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= P_IDLE;
      issued   <= '0;
      recv     <= '0;
      rpt      <= '0;
      rcomp    <= '0;
      mu_start <= 1'b0;
      og_start <= 1'b0;
      c_cnt    <= '0;
      done     <= 1'b0;
    end else begin
      mu_start <= 1'b0;
      og_start <= 1'b0;
      done     <= 1'b0;
      unique case (phase)
        P_IDLE: if (start) begin
          phase  <= P_LOAD;
          issued <= '0;
          recv   <= '0;
          rpt    <= '0;
          rcomp  <= '0;
        end
        P_LOAD: begin
          if (dram_req_valid && dram_req_ready) issued <= issued + 1'b1;
          if (dram_rsp_valid) begin
            unique case (rcomp)
              2'd0:    cx[rpt] <= dram_rsp_data;
              2'd1:    cy[rpt] <= dram_rsp_data;
              default: cz[rpt] <= dram_rsp_data;
            endcase
            recv <= recv + 1'b1;
            if (rcomp == 2'd2) begin
              rcomp <= '0;
              rpt   <= rpt + 1'b1;
            end else
              rcomp <= rcomp + 1'b1;
            if (recv + 1'b1 == n_words) begin
              phase    <= P_MAP1;
              mu_start <= 1'b1;
              c_cnt    <= '0;
            end
          end
        end
        P_MAP1, P_MAP2: begin
          if (mu_cv) begin
            if (phase == P_MAP1) c1_list[c_cnt[$clog2(MAXC1)-1:0]] <= mu_cidx;
            else                 c2_list[c_cnt[$clog2(MAXC2)-1:0]] <= mu_cidx;
            c_cnt <= c_cnt + 1'b1;
          end
          if (mu_done) begin
            c_cnt <= '0;
            if (phase == P_MAP1) begin
              phase    <= P_MAP2;
              mu_start <= 1'b1;
            end else begin
              phase    <= P_ORDER;
              og_start <= 1'b1;
            end
          end
        end
        P_ORDER: if (og_done) begin
          phase <= P_IDLE;
          done  <= 1'b1;
        end
        default: phase <= P_IDLE;
      endcase
    end
  end

  a_caps: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> 32'(cfg.n_points) <= MAXN && 32'(cfg.n_c1) <= MAXC1 && 32'(cfg.n_c2) <= MAXC2);
endmodule
