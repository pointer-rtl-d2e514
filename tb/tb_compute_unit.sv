// tb_compute_unit -- every operation on random lanes (with saturation
// corners) against a per-lane reference.
module tb_compute_unit;
  import pointer_pkg::*;
  localparam int L = 128;
  cu_op_e op;
  logic [L-1:0][ACC_W-1:0] a, b, y;
  int checks = 0, failures = 0;

  compute_unit dut (.op(op), .a(a), .b(b), .y(y));

  function automatic longint sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  initial begin
    for (int it = 0; it < 200; it++) begin
      op = cu_op_e'(it % 4);
      for (int l = 0; l < L; l++) begin
        longint va, vb;
        va = (it % 3 == 0) ? longint'($signed($urandom)) * 1000 : longint'($signed($urandom)) >>> 14;
        vb = longint'($signed($urandom)) >>> 14;
        a[l] = ACC_W'(va);
        b[l] = ACC_W'(vb);
      end
      #1;
      for (int l = 0; l < L; l++) begin
        longint va, vb, ex, got;
        va = longint'(signed'(a[l]));
        vb = longint'(signed'(b[l]));
        got = longint'(signed'(y[l]));
        case (op)
          CU_ADD:  ex = va + vb;
          CU_MAX:  ex = (va > vb) ? va : vb;
          CU_SUB:  ex = sat(va - vb);
          default: begin ex = sat(va >>> FRAC_BITS); if (ex < 0) ex = 0; end
        endcase
        checks++;
        if (got != ex) begin
          failures++;
          if (failures < 10) $display("FAIL op=%s a=%0d b=%0d got %0d exp %0d", op.name(), va, vb, got, ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
