// order_generator -- topology-aware intra-layer reordering of the last
// set-abstraction layer.
//
// Builds the execution order of the last layer's centres greedily: start
// from one centre, then repeatedly append the not-yet-ordered centre that is
// nearest to the centre appended last. Consecutive centres are then close in
// space, so their receptive fields in the earlier layer overlap and the
// feature buffer is reused. This is the algorithm of the architecture; the
// start point (the first sampled centre, where any start is allowed) and the
// one-candidate-per-cycle scan are this design's.
// With reorder_en = 0 the same loop keys on the point index instead of the
// distance and produces plain ascending-index order, for comparison.
//
// Interface: the centres are addressed by position 0..n-1 (pos out, cidx in);
// distances come from the shared distance unit (da_idx, db_idx out, dd in,
// same cycle). Each chosen centre is streamed on o_valid/o_idx. n passes of
// n cycles plus one cycle each; done pulses once at the end.
module order_generator
  import pointer_pkg::*;
#(
  parameter int unsigned MAXC = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CNT_W-1:0] n,
  input  logic             reorder_en,
  output idx_t             pos,
  input  idx_t             cidx,
  output idx_t             da_idx,
  output idx_t             db_idx,
  input  dist_t            dd,
  output logic             o_valid,
  output idx_t             o_idx,
  output logic             busy,
  output logic             done
);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_PICK} state_e;
  state_e state;

  logic [MAXC-1:0]  used;
  logic             first;
  logic [CNT_W-1:0] n_done;
  idx_t             last;
  logic             have;
  dist_t            best_k;
  idx_t             best_i;
  logic [$clog2(MAXC)-1:0] best_p;
  dist_t            key;
  logic [$clog2(MAXC)-1:0] p;

  assign p      = pos[$clog2(MAXC)-1:0];
  assign da_idx = cidx;
  assign db_idx = last;
  assign busy   = state != S_IDLE;
  assign key    = !reorder_en ? DIST_W'(cidx) : (first ? DIST_W'(pos) : dd);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      used    <= '0;
      first   <= 1'b0;
      n_done  <= '0;
      last    <= '0;
      have    <= 1'b0;
      best_k  <= '0;
      best_i  <= '0;
      best_p  <= '0;
      pos     <= '0;
      o_valid <= 1'b0;
      o_idx   <= '0;
      done    <= 1'b0;
    end else begin
      o_valid <= 1'b0;
      done    <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          used   <= '0;
          first  <= 1'b1;
          n_done <= '0;
          have   <= 1'b0;
          pos    <= '0;
          state  <= S_SCAN;
        end
        S_SCAN: begin
          if (!used[p] && (!have || key < best_k)) begin
            have   <= 1'b1;
            best_k <= key;
            best_i <= cidx;
            best_p <= p;
          end
          if (CNT_W'(pos) == n - 1'b1) state <= S_PICK;
          else                         pos   <= pos + 1'b1;
        end
        S_PICK: begin
          used[best_p] <= 1'b1;
          last    <= best_i;
          o_valid <= 1'b1;
          o_idx   <= best_i;
          first   <= 1'b0;
          have    <= 1'b0;
          pos     <= '0;
          n_done  <= n_done + 1'b1;
          if (n_done + 1'b1 == n) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else
            state <= S_SCAN;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
