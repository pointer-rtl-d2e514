// pointer_pkg -- types and constants shared by the point-cloud accelerator.
//
// Sizes follow the main configuration: 1024-point input clouds, two
// set-abstraction (SA) layers with 512 and 128 centres, 16 neighbours per
// centre, a ReRAM tile of 96 IMAs of eight 128x128 crossbars with 2-bit
// cells, and a 9 KB feature buffer. Number formats, the register map and the
// execution-token layout are this design's own choices: 16-bit Q8.8 feature
// values, 16-bit signed coordinates, 16-bit signed weights in Q8.8.
package pointer_pkg;

  localparam int unsigned DATA_W     = 16;   // feature / weight word
  localparam int unsigned FRAC_BITS  = 8;    // Q8.8
  localparam int unsigned COORD_W    = 16;
  localparam int unsigned DIST_W     = 2 * COORD_W + 2;
  localparam int unsigned ACC_W      = 48;   // dot-product accumulator
  localparam int unsigned MAX_POINTS = 1024;
  localparam int unsigned IDX_W      = $clog2(MAX_POINTS);
  localparam int unsigned CNT_W      = IDX_W + 1;
  localparam int unsigned K_MAX      = 16;
  localparam int unsigned XB_ROWS    = 128;
  localparam int unsigned XB_COLS    = 128;
  localparam int unsigned CELL_BITS  = 2;
  localparam int unsigned N_SLICES   = DATA_W / CELL_BITS;  // crossbars per IMA
  localparam int unsigned N_IMA      = 96;
  localparam int unsigned IMA_W      = 7;
  localparam int unsigned MAX_DIM    = 1024;
  localparam int unsigned DIM_W      = $clog2(MAX_DIM) + 1;
  localparam int unsigned N_MLP      = 6;    // 2 SA layers x 3 MLP layers
  localparam int unsigned ADDR_W     = 32;   // DRAM word address

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic [IDX_W-1:0]          idx_t;
  typedef logic [DIST_W-1:0]         dist_t;
  typedef logic signed [DATA_W-1:0]  word_t;

  // One MLP layer mapped onto the tile: an in_dim x out_dim weight matrix
  // split into 128x128 blocks, row block r / column block c held by IMA
  // ima_base + r*ceil(out_dim/128) + c.
  typedef struct packed {
    logic [IMA_W-1:0] ima_base;
    logic [DIM_W-1:0] out_dim;
    logic [DIM_W-1:0] in_dim;
  } mlp_cfg_t;

  typedef struct packed {
    logic [CNT_W-1:0]     n_points;    // input cloud size
    logic [CNT_W-1:0]     n_c1;        // SA1 centres
    logic [CNT_W-1:0]     n_c2;        // SA2 centres
    logic [4:0]           k;           // neighbours per centre
    logic [2:0][DIM_W-1:0] feat_len;   // vector length of level 0,1,2
    logic [ADDR_W-1:0]    coord_base;  // x,y,z words per point
    logic [2:0][ADDR_W-1:0] feat_base; // level L vector of point i at base+i*len
    logic [3:0]           slot_shift;  // log2 of buffer slot size in words
    logic                 reorder_en;  // topology-aware order of the last layer
    logic [N_MLP-1:0][$bits(mlp_cfg_t)-1:0] mlp;  // mlp_cfg_t per MLP layer
  } cfg_t;

  // Register map of config_regs (word addresses).
  localparam logic [5:0] REG_N_POINTS = 6'd0;
  localparam logic [5:0] REG_N_C1     = 6'd1;
  localparam logic [5:0] REG_N_C2     = 6'd2;
  localparam logic [5:0] REG_K        = 6'd3;
  localparam logic [5:0] REG_LEN0     = 6'd4;   // +0..2
  localparam logic [5:0] REG_COORD    = 6'd7;
  localparam logic [5:0] REG_BASE0    = 6'd8;   // +0..2
  localparam logic [5:0] REG_SLOT     = 6'd11;
  localparam logic [5:0] REG_FLAGS    = 6'd12;  // bit0 reorder_en
  localparam logic [5:0] REG_MLP0     = 6'd16;  // +0..5: {ima_base,out_dim,in_dim}

  // One scheduled execution: compute point `centre` in SA layer `layer`+1
  // from its receptive field `neigh[0..k-1]`.
  typedef struct packed {
    logic                   layer;
    idx_t                   centre;
    logic [K_MAX-1:0][IDX_W-1:0] neigh;
  } token_t;

  typedef enum logic [1:0] {CU_ADD, CU_MAX, CU_SUB, CU_RELU_Q} cu_op_e;

endpackage
