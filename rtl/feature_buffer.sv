// feature_buffer -- on-chip feature-vector buffer (9 KB by default).
//
// Holds recently used feature vectors so that the aggregation step can fetch
// them on chip instead of from DRAM. The SRAM of BUF_WORDS 16-bit words is
// cut into slots of 2^slot_shift words (set at run time to fit the longest
// vector cached), at most MAX_SLOTS of them. Each slot is tagged with the
// (level, point) of the vector it holds: level 0 = input features, level 1
// = set-abstraction-layer-1 outputs. Lookup is fully associative.
// Replacement is first-in first-out: a vector enters when it is produced
// (write) or when it had to be fetched from DRAM (read miss), and the
// oldest slot is overwritten. Reads that hit do not change the order.
// Every produced vector is also written through to DRAM; produced vectors of
// level 2 (final outputs) go to DRAM only.
//
// Read: pulse rd_req with rd_level, rd_idx, rd_len while idle; the rd_len
// words follow on rd_word_valid/rd_word in order (hit: one per cycle from
// the second cycle; miss: as DRAM returns them, each also filling the slot).
// Write: pulse wr_req with wr_level, wr_idx, wr_len; the buffer asks for
// word wr_pos on the same cycle it sends it to DRAM (wr_word is read
// combinationally). done pulses at the end of either. DRAM addresses are
// feat_base[level] + idx*len. DRAM port: one 16-bit word per request,
// requests held until dram_req_ready, read data returned in order.
//
// The 9 KB size, the write of every result to DRAM and the fetch-on-miss
// behaviour follow the architecture; FIFO replacement is read off its
// worked example; slots, tags and the word-serial ports are this design's.
module feature_buffer
  import pointer_pkg::*;
#(
  parameter int unsigned BUF_WORDS = 4608,
  parameter int unsigned MAX_SLOTS = 1152
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  cfg_t                 cfg,
  input  logic                 rd_req,
  input  logic [1:0]           rd_level,
  input  idx_t                 rd_idx,
  input  logic [DIM_W-1:0]     rd_len,
  output logic                 rd_word_valid,
  output word_t                rd_word,
  input  logic                 wr_req,
  input  logic [1:0]           wr_level,
  input  idx_t                 wr_idx,
  input  logic [DIM_W-1:0]     wr_len,
  output logic [DIM_W-1:0]     wr_pos,
  input  word_t                wr_word,
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
  output logic [1:0][31:0]     miss_cnt
);
  localparam int unsigned SW = $clog2(MAX_SLOTS);
  localparam int unsigned AW = $clog2(BUF_WORDS);

  word_t        mem [BUF_WORDS];
  logic         tv  [MAX_SLOTS];
  logic [1:0]   tl  [MAX_SLOTS];
  idx_t         ti  [MAX_SLOTS];
  logic [SW-1:0] fifo_ptr, slot;
  logic [SW:0]  n_slots;
  logic [AW-1:0] slot_base;

  typedef enum logic [1:0] {S_IDLE, S_HIT, S_MISS, S_WRITE} state_e;
  state_e state;
  logic [DIM_W-1:0]  len, issued, recv;
  logic [1:0]        level;
  logic              cache_wr;
  logic [ADDR_W-1:0] vec_addr;

  always_comb begin
    logic [31:0] fit;
    fit = 32'(BUF_WORDS) >> cfg.slot_shift;
    n_slots = (fit > MAX_SLOTS) ? (SW+1)'(MAX_SLOTS) : (SW+1)'(fit);
  end

  // fully associative lookup
  logic          hit;
  logic [SW-1:0] hit_slot;
  always_comb begin
    hit = 1'b0;
    hit_slot = '0;
    for (int s = 0; s < MAX_SLOTS; s++)
      if (tv[s] && tl[s] == rd_level && ti[s] == rd_idx) begin
        hit = 1'b1;
        hit_slot = SW'(s);
      end
  end

  assign busy           = state != S_IDLE;
  assign slot_base      = AW'(32'(slot) << cfg.slot_shift);
  assign wr_pos         = issued;
  assign dram_req_valid = (state == S_MISS || state == S_WRITE) && issued != len;
  assign dram_req_we    = state == S_WRITE;
  assign dram_req_addr  = vec_addr + ADDR_W'(issued);
  assign dram_req_wdata = wr_word;

  always_ff @(posedge clk) begin
    if (state == S_MISS && dram_rsp_valid)
      mem[slot_base + AW'(recv)] <= dram_rsp_data;
    if (state == S_WRITE && cache_wr && dram_req_valid && dram_req_ready)
      mem[slot_base + AW'(issued)] <= wr_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      fifo_ptr      <= '0;
      slot          <= '0;
      len           <= '0;
      issued        <= '0;
      recv          <= '0;
      level         <= '0;
      cache_wr      <= 1'b0;
      vec_addr      <= '0;
      rd_word_valid <= 1'b0;
      rd_word       <= '0;
      done          <= 1'b0;
      hit_cnt       <= '0;
      miss_cnt      <= '0;
      for (int s = 0; s < MAX_SLOTS; s++) tv[s] <= 1'b0;
    end else begin
      rd_word_valid <= 1'b0;
      done          <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (clear) begin
            for (int s = 0; s < MAX_SLOTS; s++) tv[s] <= 1'b0;
            fifo_ptr <= '0;
            hit_cnt  <= '0;
            miss_cnt <= '0;
          end else if (rd_req) begin
            len      <= rd_len;
            level    <= rd_level;
            issued   <= '0;
            recv     <= '0;
            vec_addr <= cfg.feat_base[rd_level] + ADDR_W'(rd_idx) * ADDR_W'(rd_len);
            if (hit) begin
              slot  <= hit_slot;
              state <= S_HIT;
              hit_cnt[rd_level[0]] <= hit_cnt[rd_level[0]] + 1;
            end else begin
              slot            <= fifo_ptr;
              tv[fifo_ptr]    <= 1'b1;
              tl[fifo_ptr]    <= rd_level;
              ti[fifo_ptr]    <= rd_idx;
              fifo_ptr        <= ((SW+1)'(fifo_ptr) + 1'b1 == n_slots) ? '0 : fifo_ptr + 1'b1;
              state           <= S_MISS;
              miss_cnt[rd_level[0]] <= miss_cnt[rd_level[0]] + 1;
            end
          end else if (wr_req) begin
            len      <= wr_len;
            level    <= wr_level;
            issued   <= '0;
            vec_addr <= cfg.feat_base[wr_level] + ADDR_W'(wr_idx) * ADDR_W'(wr_len);
            cache_wr <= wr_level != 2'd2;
            state    <= S_WRITE;
            if (wr_level != 2'd2) begin
              slot         <= fifo_ptr;
              tv[fifo_ptr] <= 1'b1;
              tl[fifo_ptr] <= wr_level;
              ti[fifo_ptr] <= wr_idx;
              fifo_ptr     <= ((SW+1)'(fifo_ptr) + 1'b1 == n_slots) ? '0 : fifo_ptr + 1'b1;
            end
          end
        end
        S_HIT: begin
          rd_word_valid <= 1'b1;
          rd_word       <= mem[slot_base + AW'(issued)];
          issued        <= issued + 1'b1;
          if (issued + 1'b1 == len) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_MISS: begin
          if (dram_req_valid && dram_req_ready) issued <= issued + 1'b1;
          if (dram_rsp_valid) begin
            rd_word_valid <= 1'b1;
            rd_word       <= dram_rsp_data;
            recv          <= recv + 1'b1;
            if (recv + 1'b1 == len) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_WRITE: begin
          if (dram_req_valid && dram_req_ready) begin
            issued <= issued + 1'b1;
            if (issued + 1'b1 == len) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_req && !busy) |-> 32'(rd_len) <= (32'd1 << cfg.slot_shift) && rd_len != '0);
endmodule
