// tb_rotmat_block4: checks the off-diagonal entries against the rotation matrix.
//
// For random quaternions the testbench builds block 4's inputs (the phi pair sums and
// differences, lambda and the diagonal, computed from q) and compares the nine outputs
// with the products of the rotation-matrix formula, e.g. c01 = 2(q1q2 - q0q3), in the
// output order c01 c02 c10 c12 c20 c21 c00 c11 c22.
module tb_rotmat_block4;
  import rotmat_pkg::*;

  localparam int unsigned QW = QW_DEFAULT;
  localparam int          N  = 3000;

  logic clk = 1'b0;
  logic signed [cw(QW)-1:0] i [N_MID];
  logic signed [cw(QW)-1:0] o [N_C];
  int checks = 0, failures = 0;

  rotmat_block4 #(.QW(QW)) dut (.i(i), .o(o));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sq(longint a);
    return a * a;
  endfunction

  initial begin
    longint q0, q1, q2, q3;
    longint e [N_C];
    for (int n = 0; n < N; n++) begin
      q0 = longint'($signed(QW'($urandom))); q1 = longint'($signed(QW'($urandom)));
      q2 = longint'($signed(QW'($urandom))); q3 = longint'($signed(QW'($urandom)));
      i[0] = cw(QW)'(sq(q1+q2) - sq(q0+q3));
      i[1] = cw(QW)'(sq(q1+q2) + sq(q0+q3));
      i[2] = cw(QW)'(sq(q2+q3) + sq(q0+q1));
      i[3] = cw(QW)'(sq(q2+q3) - sq(q0+q1));
      i[4] = cw(QW)'(sq(q1+q3) + sq(q0+q2));
      i[5] = cw(QW)'(sq(q1+q3) - sq(q0+q2));
      i[6] = cw(QW)'(sq(q0) + sq(q1) + sq(q2) + sq(q3));
      i[7] = cw(QW)'(sq(q0) + sq(q1) - sq(q2) - sq(q3));
      i[8] = cw(QW)'(sq(q0) - sq(q1) + sq(q2) - sq(q3));
      i[9] = cw(QW)'(sq(q0) - sq(q1) - sq(q2) + sq(q3));
      e[0] = 2 * (q1*q2 - q0*q3);
      e[1] = 2 * (q0*q2 + q1*q3);
      e[2] = 2 * (q1*q2 + q0*q3);
      e[3] = 2 * (q2*q3 - q0*q1);
      e[4] = 2 * (q1*q3 - q0*q2);
      e[5] = 2 * (q0*q1 + q2*q3);
      e[6] = q0*q0 + q1*q1 - q2*q2 - q3*q3;
      e[7] = q0*q0 - q1*q1 + q2*q2 - q3*q3;
      e[8] = q0*q0 - q1*q1 - q2*q2 + q3*q3;
      @(posedge clk);
      for (int k = 0; k < N_C; k++) begin
        checks++;
        if (longint'(o[k]) != e[k]) begin
          failures++;
          if (failures < 10) $display("n=%0d o[%0d]=%0d expected %0d", n, k, o[k], e[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
