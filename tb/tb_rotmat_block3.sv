// tb_rotmat_block3: checks the diagonal entries, lambda and the pass-through words.
//
// For random quaternions the testbench builds block 3's inputs (th0 = q1^2+q2^2,
// th1 = q0^2+q3^2, d0 = q0^2-q3^2, d1 = q1^2-q2^2, and six random words in the phi
// positions) and compares with the diagonal of the rotation matrix and the sum of the
// four squares, worked out from q.
module tb_rotmat_block3;
  import rotmat_pkg::*;

  localparam int unsigned QW = QW_DEFAULT;
  localparam int          N  = 3000;

  logic clk = 1'b0;
  logic signed [cw(QW)-1:0] i [N_MID];
  logic signed [cw(QW)-1:0] o [N_MID];
  int checks = 0, failures = 0;

  rotmat_block3 #(.QW(QW)) dut (.i(i), .o(o));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s0, s1, s2, s3;
    longint e [N_MID];
    for (int n = 0; n < N; n++) begin
      s0 = longint'($signed(QW'($urandom))); s0 = s0 * s0;
      s1 = longint'($signed(QW'($urandom))); s1 = s1 * s1;
      s2 = longint'($signed(QW'($urandom))); s2 = s2 * s2;
      s3 = longint'($signed(QW'($urandom))); s3 = s3 * s3;
      for (int k = 0; k < 6; k++) begin
        i[k] = cw(QW)'({$urandom, $urandom});
        e[k] = longint'(i[k]);
      end
      i[6] = cw(QW)'(s1 + s2);
      i[7] = cw(QW)'(s0 + s3);
      i[8] = cw(QW)'(s0 - s3);
      i[9] = cw(QW)'(s1 - s2);
      e[6] = s0 + s1 + s2 + s3;
      e[7] = s0 + s1 - s2 - s3;
      e[8] = s0 - s1 + s2 - s3;
      e[9] = s0 - s1 - s2 + s3;
      @(posedge clk);
      for (int k = 0; k < N_MID; k++) begin
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
