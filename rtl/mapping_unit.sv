// mapping_unit -- point-mapping stage of one set-abstraction layer:
// farthest point sampling (FPS) followed by k-nearest-neighbour search.
//
// The candidate points of the layer are addressed by position 0..n_cand-1;
// the unit drives cand_pos and reads back the point's index in the original
// cloud on cand_idx (the caller maps positions to points). Distances come
// from the shared distance unit: the unit drives the two point indices on
// da_idx / db_idx and reads dd combinationally in the same cycle.
//
// FPS keeps, per candidate, its smallest distance to the centres chosen so
// far; each pass over the candidates (one per cycle) updates it with the
// newest centre and picks the candidate whose distance is largest as the
// next centre. The first candidate seeds the sampling. Every centre is
// streamed out on c_valid/c_idx as it is chosen.
// The neighbour search then makes one pass over the candidates per centre,
// keeping a sorted list of the K nearest (insertion in one cycle; ties keep
// the earlier candidate). At the end of each pass it emits the centre's
// receptive field on rf_valid/rf_centre/rf_neigh, nearest first; entries
// k..K-1 are don't-care when k < K.
//
// Timing: about (n_centre-1)*(n_cand+1) cycles of sampling and
// n_centre*(n_cand+1) cycles of search; done pulses once at the end. FPS and
// top-k search are the algorithm the architecture names; the one-candidate-
// per-cycle organisation and the seed choice are this design's.
module mapping_unit
  import pointer_pkg::*;
#(
  parameter int unsigned MAXN = MAX_POINTS,   // candidates
  parameter int unsigned MAXC = 512,          // centres
  parameter int unsigned K    = K_MAX
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [CNT_W-1:0]            n_cand,
  input  logic [CNT_W-1:0]            n_centre,
  input  logic [4:0]                  k,
  output idx_t                        cand_pos,
  input  idx_t                        cand_idx,
  output idx_t                        da_idx,
  output idx_t                        db_idx,
  input  dist_t                       dd,
  output logic                        c_valid,
  output idx_t                        c_idx,
  output logic                        rf_valid,
  output idx_t                        rf_centre,
  output logic [K-1:0][IDX_W-1:0]     rf_neigh,
  output logic                        busy,
  output logic                        done
);
  typedef enum logic [2:0] {S_IDLE, S_SEED, S_FPS, S_FPS_NEXT, S_KNN, S_KNN_EMIT} state_e;
  state_e state;

  dist_t             mind [MAXN];
  idx_t              cen  [MAXC];
  idx_t              pos;
  logic [CNT_W-1:0]  n_sel;        // centres chosen so far
  logic              first_pass;
  idx_t              last;         // newest centre
  dist_t             best_d;
  idx_t              best_i;
  logic [CNT_W-1:0]  ci;           // centre being searched
  dist_t             kd [K];
  idx_t              ki [K];
  logic [K-1:0]      kv;

  assign cand_pos = pos;
  assign da_idx   = cand_idx;
  assign db_idx   = (state == S_KNN) ? cen[ci[$clog2(MAXC)-1:0]] : last;
  assign busy     = state != S_IDLE;

  logic  last_pos;
  dist_t new_min;
  assign last_pos = (CNT_W'(pos) == n_cand - 1'b1);
  assign new_min  = (first_pass || dd < mind[pos]) ? dd : mind[pos];

  // insertion point of the current distance into the sorted neighbour list
  logic [$clog2(K+1)-1:0] ins;
  always_comb begin
    ins = '0;
    for (int e = 0; e < K; e++)
      if (kv[e] && kd[e] <= dd) ins = ins + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pos        <= '0;
      n_sel      <= '0;
      first_pass <= 1'b0;
      last       <= '0;
      best_d     <= '0;
      best_i     <= '0;
      ci         <= '0;
      kv         <= '0;
      c_valid    <= 1'b0;
      c_idx      <= '0;
      rf_valid   <= 1'b0;
      rf_centre  <= '0;
      done       <= 1'b0;
    end else begin
      c_valid  <= 1'b0;
      rf_valid <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pos   <= '0;
          state <= S_SEED;
        end
        S_SEED: begin                        // first candidate seeds FPS
          cen[0]     <= cand_idx;
          last       <= cand_idx;
          c_valid    <= 1'b1;
          c_idx      <= cand_idx;
          n_sel      <= CNT_W'(1);
          first_pass <= 1'b1;
          best_d     <= '0;
          best_i     <= cand_idx;
          state      <= (n_centre > CNT_W'(1)) ? S_FPS : S_KNN;
          ci         <= '0;
          kv         <= '0;
        end
        S_FPS: begin
          mind[pos] <= new_min;
          if (new_min > best_d) begin
            best_d <= new_min;
            best_i <= cand_idx;
          end
          if (last_pos) state <= S_FPS_NEXT;
          else          pos   <= pos + 1'b1;
        end
        S_FPS_NEXT: begin
          cen[n_sel[$clog2(MAXC)-1:0]] <= best_i;
          last       <= best_i;
          c_valid    <= 1'b1;
          c_idx      <= best_i;
          n_sel      <= n_sel + 1'b1;
          first_pass <= 1'b0;
          best_d     <= '0;
          pos        <= '0;
          state      <= (n_sel + 1'b1 == n_centre) ? S_KNN : S_FPS;
        end
        S_KNN: begin
          if (32'(ins) < K) begin
            for (int e = K - 1; e > 0; e--)
              if (32'(e) > 32'(ins)) begin
                kd[e] <= kd[e-1];
                ki[e] <= ki[e-1];
                kv[e] <= kv[e-1];
              end
            kd[ins] <= dd;
            ki[ins] <= cand_idx;
            kv[ins] <= 1'b1;
          end
          if (last_pos) state <= S_KNN_EMIT;
          else          pos   <= pos + 1'b1;
        end
        S_KNN_EMIT: begin
          rf_valid  <= 1'b1;
          rf_centre <= cen[ci[$clog2(MAXC)-1:0]];
          kv        <= '0;
          pos       <= '0;
          ci        <= ci + 1'b1;
          if (ci + 1'b1 == n_centre) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else
            state <= S_KNN;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb
    for (int e = 0; e < K; e++) rf_neigh[e] = ki[e];

  // a layer needs at least k candidates and one centre
  a_sizes: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> n_cand >= CNT_W'(k) && n_centre != '0 && n_centre <= n_cand);
endmodule
