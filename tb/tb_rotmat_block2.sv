// tb_rotmat_block2: checks the first adder level.
//
// For random quaternions the testbench squares the pair sums and coefficients itself,
// feeds them to block 2 in block 1's order, and compares the ten outputs with the
// sums/differences worked out from q directly.
module tb_rotmat_block2;
  import rotmat_pkg::*;

  localparam int unsigned QW = QW_DEFAULT;
  localparam int          N  = 3000;

  logic clk = 1'b0;
  logic        [sq_w(QW)-1:0] i [N_SQ];
  logic signed [cw(QW)-1:0]   o [N_MID];
  int checks = 0, failures = 0;

  rotmat_block2 #(.QW(QW)) dut (.i(i), .o(o));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint q0, q1, q2, q3;
    longint e [N_MID];
    for (int n = 0; n < N; n++) begin
      if (n == 0) begin
        q0 = -(64'sd1 <<< (QW-1)); q1 = q0; q2 = q0; q3 = q0;
      end else begin
        q0 = longint'($signed(QW'($urandom))); q1 = longint'($signed(QW'($urandom)));
        q2 = longint'($signed(QW'($urandom))); q3 = longint'($signed(QW'($urandom)));
      end
      i[0] = sq_w(QW)'((q1+q2)*(q1+q2));
      i[1] = sq_w(QW)'((q0+q3)*(q0+q3));
      i[2] = sq_w(QW)'((q2+q3)*(q2+q3));
      i[3] = sq_w(QW)'((q0+q1)*(q0+q1));
      i[4] = sq_w(QW)'((q1+q3)*(q1+q3));
      i[5] = sq_w(QW)'((q0+q2)*(q0+q2));
      i[6] = sq_w(QW)'(q0*q0);
      i[7] = sq_w(QW)'(q1*q1);
      i[8] = sq_w(QW)'(q2*q2);
      i[9] = sq_w(QW)'(q3*q3);
      // (a+b)^2 +/- (c+d)^2 expanded by hand
      e[0] = q1*q1 + q2*q2 + 2*q1*q2 - q0*q0 - q3*q3 - 2*q0*q3;
      e[1] = q1*q1 + q2*q2 + 2*q1*q2 + q0*q0 + q3*q3 + 2*q0*q3;
      e[2] = q2*q2 + q3*q3 + 2*q2*q3 + q0*q0 + q1*q1 + 2*q0*q1;
      e[3] = q2*q2 + q3*q3 + 2*q2*q3 - q0*q0 - q1*q1 - 2*q0*q1;
      e[4] = q1*q1 + q3*q3 + 2*q1*q3 + q0*q0 + q2*q2 + 2*q0*q2;
      e[5] = q1*q1 + q3*q3 + 2*q1*q3 - q0*q0 - q2*q2 - 2*q0*q2;
      e[6] = q1*q1 + q2*q2;
      e[7] = q0*q0 + q3*q3;
      e[8] = q0*q0 - q3*q3;
      e[9] = q1*q1 - q2*q2;
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
