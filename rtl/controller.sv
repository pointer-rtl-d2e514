// controller -- main controller of the back-end.
//
// Runs the whole inference of two set-abstraction layers:
//   start -> front-end (coordinates, sampling, neighbour search, order)
//         -> scheduler issues execution tokens -> one token at a time:
//   1. fetch the centre's vector Fi from the feature buffer (level = layer);
//   2. for each of the k neighbours Fj: fetch it, form the difference
//      Fj - Fi with the CU, run the three MLP layers of this SA layer on
//      the ReRAM tile, ReLU after each, and max-pool into the output vector;
//   3. write the output vector (level = layer + 1) through the buffer.
// An MLP layer of in_dim x out_dim is computed one 128x128 block at a time:
// for each output block, the row blocks are sent to their IMAs
// (ima_base + r*ncb + c) and the partial sums added in the CU; the sum is
// then requantised to Q8.8 with ReLU. Inputs beyond in_dim are forced to
// zero and outputs beyond out_dim cleared, so unused crossbar rows never
// matter.
//
// The sequence of aggregation, MLP and max reduction, and the division of
// work between controller, ReRAM tile, CU and buffer, follow the
// architecture. Executing one point at a time (instead of overlapping the
// two layers' arrays) and the block-by-block MLP mapping are this design's.
//
// Interfaces: valid/ready tokens from the scheduler; request/stream/done
// handshakes to the buffer (see feature_buffer); start/sel/x and done/y to
// the tile (see reram_tile). exec_cnt counts executed points per layer.
module controller
  import pointer_pkg::*;
#(
  parameter int unsigned K = K_MAX
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  cfg_t                           cfg,
  output logic                           busy,
  output logic                           done,
  // front-end and scheduler
  output logic                           fe_start,
  input  logic                           fe_done,
  output logic                           sch_clear,
  output logic                           sch_go,
  input  logic                           sch_done,
  input  logic                           tok_valid,
  output logic                           tok_ready,
  input  token_t                         tok,
  // feature buffer
  output logic                           buf_clear,
  output logic                           rd_req,
  output logic [1:0]                     rd_level,
  output idx_t                           rd_idx,
  output logic [DIM_W-1:0]               rd_len,
  input  logic                           rd_word_valid,
  input  word_t                          rd_word,
  output logic                           wr_req,
  output logic [1:0]                     wr_level,
  output idx_t                           wr_idx,
  output logic [DIM_W-1:0]               wr_len,
  input  logic [DIM_W-1:0]               wr_pos,
  output word_t                          wr_word,
  input  logic                           buf_done,
  // ReRAM tile
  output logic                           t_start,
  output logic [IMA_W-1:0]               t_sel,
  output logic [XB_ROWS-1:0][DATA_W-1:0] t_x,
  input  logic                           t_done,
  input  logic [XB_COLS-1:0][ACC_W-1:0]  t_y,
  output logic [1:0][31:0]               exec_cnt
);
  localparam int unsigned NCH = MAX_DIM / XB_COLS;
  localparam int unsigned CW  = $clog2(NCH);
  typedef logic [XB_COLS-1:0][DATA_W-1:0] chunk_t;
  typedef logic [XB_COLS-1:0][ACC_W-1:0]  wide_t;

  typedef enum logic [3:0] {
    S_IDLE, S_FE, S_TOK, S_FC_REQ, S_FC_RX, S_FN_REQ, S_FN_RX, S_DIFF,
    S_MVM_START, S_MVM_WAIT, S_MVM_ACT, S_MAX, S_WR_REQ, S_WR
  } state_e;
  state_e state;

  chunk_t fc   [NCH];
  chunk_t act  [2][NCH];
  chunk_t vout [NCH];
  wide_t  acc;

  token_t            cur;
  logic [4:0]        nb;          // neighbour
  logic [1:0]        t;           // MLP layer 0..2
  logic              pp;          // act[pp] is the MLP input
  logic [CW:0]       c, rb, cb;   // chunk / row block / column block
  logic [DIM_W-1:0]  w;           // word being received

  logic [DIM_W-1:0] lin, lout;
  mlp_cfg_t         mc;
  logic [CW:0]      nch_in, nch_out, nrb, ncb;
  assign lin     = cfg.feat_len[cur.layer];
  assign lout    = cfg.feat_len[32'(cur.layer) + 1];
  assign mc      = mlp_cfg_t'(cfg.mlp[32'(cur.layer) * 3 + 32'(t)]);
  assign nch_in  = (CW+1)'((32'(lin) + XB_COLS - 1) / XB_COLS);
  assign nch_out = (CW+1)'((32'(lout) + XB_COLS - 1) / XB_COLS);
  assign nrb     = (CW+1)'((32'(mc.in_dim) + XB_ROWS - 1) / XB_ROWS);
  assign ncb     = (CW+1)'((32'(mc.out_dim) + XB_COLS - 1) / XB_COLS);

  function automatic wide_t widen(input chunk_t v);
    for (int l = 0; l < XB_COLS; l++) widen[l] = ACC_W'(signed'(v[l]));
  endfunction
  function automatic chunk_t narrow(input wide_t v);
    for (int l = 0; l < XB_COLS; l++) narrow[l] = v[l][DATA_W-1:0];
  endfunction

  // ---------------- compute unit ----------------
  cu_op_e cu_op;
  wide_t  cu_a, cu_b, cu_y;
  always_comb begin
    cu_op = CU_ADD;
    cu_a  = acc;
    cu_b  = t_y;
    unique case (state)
      S_DIFF: begin
        cu_op = CU_SUB;
        cu_a  = widen(act[0][c[CW-1:0]]);
        cu_b  = widen(fc[c[CW-1:0]]);
      end
      S_MVM_ACT: cu_op = CU_RELU_Q;
      S_MAX: begin
        cu_op = CU_MAX;
        cu_a  = widen(act[pp][c[CW-1:0]]);
        cu_b  = widen(vout[c[CW-1:0]]);
      end
      default: ;
    endcase
  end

  compute_unit u_cu (.op(cu_op), .a(cu_a), .b(cu_b), .y(cu_y));

  // ---------------- tile input: row block rb of the MLP input ----------------
  always_comb
    for (int r = 0; r < XB_ROWS; r++)
      t_x[r] = (32'(rb) * XB_ROWS + r < 32'(mc.in_dim)) ? act[pp][rb[CW-1:0]][r] : '0;
  assign t_sel   = mc.ima_base + IMA_W'(32'(rb) * 32'(ncb) + 32'(cb));
  assign t_start = state == S_MVM_START;

  // ---------------- handshakes ----------------
  assign busy      = state != S_IDLE;
  assign tok_ready = state == S_TOK && tok_valid && !sch_done;

  // the scheduler's done pulse follows the last token, while that token is
  // still being computed, so it is kept until the controller is back in S_TOK
  logic sch_fin;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sch_fin <= 1'b0;
    else if (state == S_IDLE) sch_fin <= 1'b0;
    else if (sch_done) sch_fin <= 1'b1;
  assign rd_req    = state == S_FC_REQ || state == S_FN_REQ;
  assign rd_level  = {1'b0, cur.layer};
  assign rd_idx    = (state == S_FC_REQ) ? cur.centre : cur.neigh[nb[$clog2(K)-1:0]];
  assign rd_len    = lin;
  assign wr_req    = state == S_WR_REQ;
  assign wr_level  = 2'(cur.layer) + 2'd1;
  assign wr_idx    = cur.centre;
  assign wr_len    = lout;
  assign wr_word   = vout[wr_pos[DIM_W-2:7]][wr_pos[6:0]];

  always_ff @(posedge clk) begin
    unique case (state)
      S_FC_RX: if (rd_word_valid) fc[w[DIM_W-2:7]][w[6:0]] <= rd_word;
      S_FN_RX: if (rd_word_valid) act[0][w[DIM_W-2:7]][w[6:0]] <= rd_word;
      S_DIFF:  act[0][c[CW-1:0]] <= narrow(cu_y);
      S_MVM_WAIT: if (t_done) acc <= (rb == '0) ? t_y : cu_y;
      S_MVM_ACT:
        for (int l = 0; l < XB_COLS; l++)
          act[!pp][cb[CW-1:0]][l] <= (32'(cb) * XB_COLS + l < 32'(mc.out_dim)) ? cu_y[l][DATA_W-1:0] : '0;
      S_MAX: vout[c[CW-1:0]] <= (nb == '0) ? act[pp][c[CW-1:0]] : narrow(cu_y);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      nb        <= '0;
      t         <= '0;
      pp        <= 1'b0;
      c         <= '0;
      rb        <= '0;
      cb        <= '0;
      w         <= '0;
      fe_start  <= 1'b0;
      sch_clear <= 1'b0;
      sch_go    <= 1'b0;
      buf_clear <= 1'b0;
      done      <= 1'b0;
      exec_cnt  <= '0;
    end else begin
      fe_start  <= 1'b0;
      sch_clear <= 1'b0;
      sch_go    <= 1'b0;
      buf_clear <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          fe_start  <= 1'b1;
          sch_clear <= 1'b1;
          buf_clear <= 1'b1;
          exec_cnt  <= '0;
          state     <= S_FE;
        end
        S_FE: if (fe_done) begin
          sch_go <= 1'b1;
          state  <= S_TOK;
        end
        S_TOK: begin
          if (sch_done || (sch_fin && !tok_valid)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (tok_valid) begin
            cur   <= tok;
            state <= S_FC_REQ;
          end
        end
        S_FC_REQ: begin
          w     <= '0;
          state <= S_FC_RX;
        end
        S_FC_RX: begin
          if (rd_word_valid) w <= w + 1'b1;
          if (buf_done) begin
            nb    <= '0;
            state <= S_FN_REQ;
          end
        end
        S_FN_REQ: begin
          w     <= '0;
          state <= S_FN_RX;
        end
        S_FN_RX: begin
          if (rd_word_valid) w <= w + 1'b1;
          if (buf_done) begin
            c     <= '0;
            state <= S_DIFF;
          end
        end
        S_DIFF: begin
          if (c + 1'b1 == nch_in) begin
            pp    <= 1'b0;
            t     <= '0;
            rb    <= '0;
            cb    <= '0;
            state <= S_MVM_START;
          end
          c <= c + 1'b1;
        end
        S_MVM_START: state <= S_MVM_WAIT;
        S_MVM_WAIT: if (t_done) begin
          if (rb + 1'b1 == nrb) state <= S_MVM_ACT;
          else begin
            rb    <= rb + 1'b1;
            state <= S_MVM_START;
          end
        end
        S_MVM_ACT: begin
          rb <= '0;
          if (cb + 1'b1 == ncb) begin
            cb <= '0;
            pp <= !pp;
            if (t == 2'd2) begin
              c     <= '0;
              state <= S_MAX;
            end else begin
              t     <= t + 1'b1;
              state <= S_MVM_START;
            end
          end else begin
            cb    <= cb + 1'b1;
            state <= S_MVM_START;
          end
        end
        S_MAX: begin
          c <= c + 1'b1;
          if (c + 1'b1 == nch_out) begin
            if (nb + 1'b1 == cfg.k) state <= S_WR_REQ;
            else begin
              nb    <= nb + 1'b1;
              state <= S_FN_REQ;
            end
          end
        end
        S_WR_REQ: state <= S_WR;
        S_WR: if (buf_done) begin
          exec_cnt[cur.layer] <= exec_cnt[cur.layer] + 1;
          state <= S_TOK;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the third MLP layer must produce the layer's output length
  a_dims: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_MAX |-> mc.out_dim == lout);
endmodule
