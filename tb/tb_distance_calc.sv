// tb_distance_calc -- random and corner-case operands against a 64-bit
// reference of the squared Euclidean distance.
module tb_distance_calc;
  import pointer_pkg::*;
  coord_t ax, ay, az, bx, by, bz;
  dist_t  d;
  int checks = 0, failures = 0;

  distance_calc dut (.a_x(ax), .a_y(ay), .a_z(az), .b_x(bx), .b_y(by), .b_z(bz), .d(d));

  task automatic check();
    longint ex;
    #1;
    ex = (longint'(ax) - longint'(bx)) ** 2 + (longint'(ay) - longint'(by)) ** 2 + (longint'(az) - longint'(bz)) ** 2;
    checks++;
    if (longint'(d) != ex) begin
      failures++;
      $display("FAIL a=(%0d,%0d,%0d) b=(%0d,%0d,%0d) got %0d exp %0d", ax, ay, az, bx, by, bz, d, ex);
    end
  endtask

  initial begin
    ax = 16'sh7fff; ay = 16'sh7fff; az = 16'sh7fff; bx = 16'sh8000; by = 16'sh8000; bz = 16'sh8000; check();
    ax = 0; ay = 0; az = 0; bx = 0; by = 0; bz = 0; check();
    ax = 3; ay = -4; az = 0; bx = 0; by = 0; bz = 12; check();
    repeat (2000) begin
      {ax, ay, az} = {$urandom, $urandom};
      {bx, by, bz} = {$urandom, $urandom};
      check();
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
