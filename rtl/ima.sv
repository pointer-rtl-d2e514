// ima -- in-situ multiply-accumulate unit: one 128x128 matrix of 16-bit
// signed weights held in eight 2-bit-per-cell ReRAM crossbars.
//
// Weight w[i][j] is stored offset by 2^15 (woff = w + 2^15, 0..65535) and
// split into eight 2-bit slices; crossbar s holds slice s. The 16-bit
// two's-complement input vector is applied one bit plane per cycle through
// 1-bit DACs. For bit plane b every crossbar returns, per column, the count
// sum_i x_b[i]*slice_s[i][j]; the shift-and-add stage forms
//   t_b[j] = sum_s colsum_s[j] << 2s  -  popcount(x_b) << 15
//          = sum_i x_b[i] * w[i][j]
// and accumulates y[j] += t_b[j] << b, subtracting for the sign plane b = 15.
// The result is the exact signed dot product y[j] = sum_i x[i]*w[i][j].
//
// The eight arrays of 128x128 per IMA and the 2-bit cells follow the source
// architecture; the 16-bit precision, the offset encoding and bit-serial
// input are this design's choices (the split of the well-known ISAAC IMA).
//
// Timing: start (with x) is taken when idle; bit planes are issued on the 16
// following cycles, and done pulses for one cycle with y valid 18 cycles
// after start. y holds its value until the next start. prog_en writes one
// weight per cycle.
module ima
  import pointer_pkg::*;
#(
  parameter int unsigned ROWS = XB_ROWS,
  parameter int unsigned COLS = XB_COLS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          prog_en,
  input  logic [$clog2(ROWS)-1:0]       prog_row,
  input  logic [$clog2(COLS)-1:0]       prog_col,
  input  word_t                         prog_w,
  input  logic                          start,
  input  logic [ROWS-1:0][DATA_W-1:0]   x,
  output logic                          busy,
  output logic                          done,
  output logic [COLS-1:0][ACC_W-1:0]    y
);
  localparam int unsigned SUM_W = $clog2(ROWS * 3 + 1);

  logic [ROWS-1:0][DATA_W-1:0] x_q;
  logic [4:0]                  bit_i;      // plane being issued
  logic                        issuing;
  logic                        acc_v;      // crossbar outputs valid this cycle
  logic [3:0]                  acc_b;      // their plane index
  logic [$clog2(ROWS+1)-1:0]   pop_q;      // popcount of the issued plane
  logic [ROWS-1:0]             plane;
  logic [DATA_W-1:0]           woff;
  logic [COLS-1:0][SUM_W-1:0]  col_sum [N_SLICES];

  assign woff = prog_w ^ {1'b1, {(DATA_W-1){1'b0}}};

  always_comb
    for (int i = 0; i < ROWS; i++) plane[i] = x_q[i][bit_i[3:0]];

  for (genvar s = 0; s < N_SLICES; s++) begin : g_xb
    reram_xbar #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS)) u_xb (
      .clk      (clk),
      .prog_en  (prog_en),
      .prog_row (prog_row),
      .prog_col (prog_col),
      .prog_val (woff[CELL_BITS*s +: CELL_BITS]),
      .sample   (issuing),
      .in_bits  (plane),
      .col_sum  (col_sum[s])
    );
  end

  assign busy = issuing | acc_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      bit_i   <= '0;
      acc_v   <= 1'b0;
      acc_b   <= '0;
      pop_q   <= '0;
      done    <= 1'b0;
    end else begin
      done  <= acc_v && acc_b == 4'd15;
      acc_v <= issuing;
      acc_b <= bit_i[3:0];
      pop_q <= $bits(pop_q)'($countones(plane));
      if (start && !busy) begin
        issuing <= 1'b1;
        bit_i   <= '0;
      end else if (issuing) begin
        if (bit_i == 5'd15) issuing <= 1'b0;
        bit_i <= bit_i + 5'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start && !busy) x_q <= x;
    if (acc_v)
      for (int j = 0; j < COLS; j++) begin
        logic signed [ACC_W-1:0] t;
        t = '0;
        for (int s = 0; s < N_SLICES; s++)
          t = t + (ACC_W'(col_sum[s][j]) << (CELL_BITS * s));
        t = t - (ACC_W'(pop_q) << (DATA_W - 1));
        if (acc_b == 4'd0)
          y[j] <= t;
        else if (acc_b == 4'd15)
          y[j] <= y[j] - (t <<< acc_b);
        else
          y[j] <= y[j] + (t <<< acc_b);
      end
  end
endmodule
