// scheduler -- inter-layer coordination of two set-abstraction layers.
//
// Stores the receptive fields sent by the front-end (layer-1 and layer-2
// centres with their k neighbours each) and the execution order of the last
// layer. On go it issues execution tokens receptive field by receptive
// field: for each layer-2 centre in the given order, first every point of
// its receptive field that has not yet been computed in layer 1 (in
// neighbour order), then the layer-2 centre itself. A layer-1 point shared
// by several receptive fields is issued only once, so its result is reused
// from the feature buffer the next time it is needed. Layer-1 centres that
// belong to no layer-2 receptive field are never issued. This is the
// architecture's scheduling algorithm; holding the tables here and putting
// the neighbour list into each token are this design's choices.
//
// Interface: clear (pulse) forgets everything; rf_* and ord_* are written
// one per cycle while valid. Tokens leave on tok_valid/tok_ready/tok
// (valid/ready, the token is held while not accepted). A neighbour already
// computed costs one idle cycle. done pulses after the last token.
module scheduler
  import pointer_pkg::*;
#(
  parameter int unsigned MAXN  = MAX_POINTS,
  parameter int unsigned MAXC1 = 512,
  parameter int unsigned MAXC2 = 128,
  parameter int unsigned K     = K_MAX
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic [4:0]               k,
  input  logic                     rf_valid,
  input  logic                     rf_layer,
  input  idx_t                     rf_centre,
  input  logic [K-1:0][IDX_W-1:0]  rf_neigh,
  input  logic                     ord_valid,
  input  idx_t                     ord_idx,
  input  logic                     go,
  output logic                     tok_valid,
  input  logic                     tok_ready,
  output token_t                   tok,
  output logic                     busy,
  output logic                     done
);
  localparam int unsigned S1 = $clog2(MAXC1);
  localparam int unsigned S2 = $clog2(MAXC2);

  logic [K-1:0][IDX_W-1:0] rf1 [MAXC1];
  logic [K-1:0][IDX_W-1:0] rf2 [MAXC2];
  logic [S1-1:0]           slot1_of [MAXN];
  logic [S2-1:0]           slot2_of [MAXN];
  idx_t                    o2 [MAXC2];
  logic [S1:0]             n1;
  logic [S2:0]             n2, n_ord, j;
  logic [MAXN-1:0]         done1;   // layer-1 point already issued
  logic [4:0]              m;

  typedef enum logic [1:0] {S_IDLE, S_L1, S_L2} state_e;
  state_e state;

  idx_t                    c2, nb;
  logic [K-1:0][IDX_W-1:0] field;
  assign c2    = o2[j[S2-1:0]];
  assign field = rf2[slot2_of[c2]];
  assign nb    = field[m[$clog2(K)-1:0]];
  assign busy  = state != S_IDLE;

  always_comb begin
    tok        = '0;
    tok_valid  = 1'b0;
    if (state == S_L1) begin
      tok.layer  = 1'b0;
      tok.centre = nb;
      tok.neigh  = rf1[slot1_of[nb]];
      tok_valid  = !done1[nb];
    end else if (state == S_L2) begin
      tok.layer  = 1'b1;
      tok.centre = c2;
      tok.neigh  = field;
      tok_valid  = 1'b1;
    end
  end

  // table writes
  always_ff @(posedge clk) begin
    if (rf_valid && !rf_layer) begin
      rf1[n1[S1-1:0]]     <= rf_neigh;
      slot1_of[rf_centre] <= n1[S1-1:0];
    end
    if (rf_valid && rf_layer) begin
      rf2[n2[S2-1:0]]     <= rf_neigh;
      slot2_of[rf_centre] <= n2[S2-1:0];
    end
    if (ord_valid) o2[n_ord[S2-1:0]] <= ord_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n1    <= '0;
      n2    <= '0;
      n_ord <= '0;
      j     <= '0;
      m     <= '0;
      done1 <= '0;
      state <= S_IDLE;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        n1    <= '0;
        n2    <= '0;
        n_ord <= '0;
        state <= S_IDLE;
      end else begin
        if (rf_valid && !rf_layer) n1 <= n1 + 1'b1;
        if (rf_valid &&  rf_layer) n2 <= n2 + 1'b1;
        if (ord_valid)             n_ord <= n_ord + 1'b1;
      end
      unique case (state)
        S_IDLE: if (go && !clear) begin
          done1 <= '0;
          j     <= '0;
          m     <= '0;
          state <= (n_ord != '0) ? S_L1 : S_IDLE;
          done  <= n_ord == '0;
        end
        S_L1: if (done1[nb] || tok_ready) begin
          done1[nb] <= 1'b1;
          if (m + 1'b1 == k) state <= S_L2;
          else               m     <= m + 1'b1;
        end
        S_L2: if (tok_ready) begin
          m <= '0;
          j <= j + 1'b1;
          if (j + 1'b1 == n_ord) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else
            state <= S_L1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a token is held until it is taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n || clear)
    tok_valid && !tok_ready |=> tok_valid && $stable(tok));
endmodule
