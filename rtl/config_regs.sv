// config_regs -- host-written configuration registers.
//
// A 32-bit write-only register file (wr_en, wr_addr, wr_data, one write per
// cycle) decoded into the cfg_t structure that the rest of the accelerator
// reads: cloud and centre counts, neighbours k, the vector length and DRAM
// base of each feature level, the buffer slot size, the reorder enable and
// the placement of the six MLP layers on the IMAs. The register map is in
// pointer_pkg. Reset values describe the smallest evaluated network
// (1024 points, 512 and 128 centres, k = 16, vector lengths 4/128/256,
// 128-word buffer slots, reordering on); the MLP placement resets to zero
// and must be written. The existence of a configuration block follows the
// architecture; its contents and map are this design's.
module config_regs
  import pointer_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [5:0]  wr_addr,
  input  logic [31:0] wr_data,
  output cfg_t        cfg
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg            <= '0;
      cfg.n_points   <= CNT_W'(1024);
      cfg.n_c1       <= CNT_W'(512);
      cfg.n_c2       <= CNT_W'(128);
      cfg.k          <= 5'd16;
      cfg.feat_len[0] <= DIM_W'(4);
      cfg.feat_len[1] <= DIM_W'(128);
      cfg.feat_len[2] <= DIM_W'(256);
      cfg.slot_shift <= 4'd7;
      cfg.reorder_en <= 1'b1;
    end else if (wr_en) begin
      unique casez (wr_addr)
        REG_N_POINTS: cfg.n_points <= wr_data[CNT_W-1:0];
        REG_N_C1:     cfg.n_c1     <= wr_data[CNT_W-1:0];
        REG_N_C2:     cfg.n_c2     <= wr_data[CNT_W-1:0];
        REG_K:        cfg.k        <= wr_data[4:0];
        6'd4, 6'd5, 6'd6:
                      cfg.feat_len[wr_addr - REG_LEN0] <= wr_data[DIM_W-1:0];
        REG_COORD:    cfg.coord_base <= wr_data;
        6'd8, 6'd9, 6'd10:
                      cfg.feat_base[wr_addr - REG_BASE0] <= wr_data;
        REG_SLOT:     cfg.slot_shift <= wr_data[3:0];
        REG_FLAGS:    cfg.reorder_en <= wr_data[0];
        6'd16, 6'd17, 6'd18, 6'd19, 6'd20, 6'd21:
                      cfg.mlp[wr_addr - REG_MLP0] <= wr_data[$bits(mlp_cfg_t)-1:0];
        default: ;
      endcase
    end
  end
endmodule
