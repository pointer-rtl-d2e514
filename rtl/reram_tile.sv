// reram_tile -- the ReRAM tile: N_IMA IMAs holding every MLP weight of the
// network, plus the routing that connects them to the controller.
//
// Each IMA holds one 128x128 block of 16-bit weights. Weights are written
// once through the programming port (prog_ima selects the IMA). For a
// vector-matrix product the controller names an IMA with sel and pulses
// start with a 128-element input chunk; the chunk is routed to that IMA
// only, and its 128 dot products come back on y when done pulses, 18 cycles
// later. The routing (input broadcast, per-IMA start and a registered result
// select) stands for the reconfigurable data path of the architecture. Only
// one IMA computes at a time: speed is traded for a single result path,
// which is enough because the MLP is not the bottleneck once it runs in
// ReRAM. 96 IMAs follow the source architecture's main configuration.
module reram_tile
  import pointer_pkg::*;
#(
  parameter int unsigned NIMA = N_IMA
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            prog_en,
  input  logic [IMA_W-1:0]                prog_ima,
  input  logic [$clog2(XB_ROWS)-1:0]      prog_row,
  input  logic [$clog2(XB_COLS)-1:0]      prog_col,
  input  word_t                           prog_w,
  input  logic                            start,
  input  logic [IMA_W-1:0]                sel,
  input  logic [XB_ROWS-1:0][DATA_W-1:0]  x,
  output logic                            busy,
  output logic                            done,
  output logic [XB_COLS-1:0][ACC_W-1:0]   y
);
  logic [NIMA-1:0]                        i_busy, i_done;
  logic [XB_COLS-1:0][ACC_W-1:0]          i_y [NIMA];
  logic [IMA_W-1:0]                       sel_q;

  for (genvar m = 0; m < NIMA; m++) begin : g_ima
    ima u_ima (
      .clk      (clk),
      .rst_n    (rst_n),
      .prog_en  (prog_en && prog_ima == IMA_W'(m)),
      .prog_row (prog_row),
      .prog_col (prog_col),
      .prog_w   (prog_w),
      .start    (start && sel == IMA_W'(m)),
      .x        (x),
      .busy     (i_busy[m]),
      .done     (i_done[m]),
      .y        (i_y[m])
    );
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     sel_q <= '0;
    else if (start) sel_q <= sel;

  assign busy = |i_busy;
  assign done = |i_done;
  assign y    = i_y[sel_q];

  // one vector-matrix product at a time, to an IMA that exists
  a_one_mvm: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy && 32'(sel) < NIMA);
endmodule
