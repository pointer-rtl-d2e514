// compute_unit -- the digital computation unit (CU) of the ReRAM tile.
//
// A LANES-wide vector unit applied to one 128-element chunk per cycle:
//   CU_ADD    y = a + b                (partial sums of row blocks)
//   CU_MAX    y = max(a, b)            (max-pool reduction over neighbours)
//   CU_SUB    y = sat16(a - b)         (aggregation difference Fj - Fi)
//   CU_RELU_Q y = max(0, sat16(a >>> FRAC_BITS))
//                                      (non-linearity and requantisation of
//                                       a Q16.16 dot product to Q8.8)
// Lanes are ACC_W-bit signed. ADD, MAX and a non-linear function are the
// operations the source architecture names; the saturation and Q8.8 format
// are this design's. Combinational, result in the same cycle.
module compute_unit
  import pointer_pkg::*;
#(
  parameter int unsigned LANES = XB_COLS,
  parameter int unsigned W     = ACC_W
) (
  input  cu_op_e                     op,
  input  logic [LANES-1:0][W-1:0]    a,
  input  logic [LANES-1:0][W-1:0]    b,
  output logic [LANES-1:0][W-1:0]    y
);
  localparam logic signed [W-1:0] WMAX = W'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [W-1:0] WMIN = -W'(1 << (DATA_W - 1));

  function automatic logic signed [W-1:0] sat16(input logic signed [W-1:0] v);
    if (v > WMAX) return WMAX;
    if (v < WMIN) return WMIN;
    return v;
  endfunction

  always_comb
    for (int l = 0; l < LANES; l++) begin
      logic signed [W-1:0] sa, sb, sh;
      sa = a[l];
      sb = b[l];
      sh = sat16(sa >>> FRAC_BITS);
      unique case (op)
        CU_ADD:    y[l] = sa + sb;
        CU_MAX:    y[l] = (sa > sb) ? sa : sb;
        CU_SUB:    y[l] = sat16(sa - sb);
        CU_RELU_Q: y[l] = (sh < 0) ? '0 : sh;
        default:   y[l] = sa;
      endcase
    end
endmodule
