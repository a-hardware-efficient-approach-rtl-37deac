// tb_rotmat_block1: checks the ten squares of block 1.
//
// Random quaternions (plus the extreme corners -2^(QW-1) and 2^(QW-1)-1) are applied; the
// expected pair-sum squares and single squares are computed from q in 64-bit integers.
module tb_rotmat_block1;
  import rotmat_pkg::*;

  localparam int unsigned QW = QW_DEFAULT;
  localparam int          N  = 3000;

  logic clk = 1'b0;
  logic signed [QW-1:0]       q [N_Q];
  logic        [sq_w(QW)-1:0] o [N_SQ];
  int checks = 0, failures = 0;

  rotmat_block1 #(.QW(QW)) dut (.q(q), .o(o));

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
    longint a [N_Q];
    longint e [N_SQ];
    for (int n = 0; n < N; n++) begin
      for (int k = 0; k < N_Q; k++) begin
        if (n == 0)      q[k] = {1'b1, {(QW-1){1'b0}}};
        else if (n == 1) q[k] = {1'b0, {(QW-1){1'b1}}};
        else             q[k] = QW'($urandom);
        a[k] = longint'(q[k]);
      end
      e[0] = sq(a[1] + a[2]);
      e[1] = sq(a[0] + a[3]);
      e[2] = sq(a[2] + a[3]);
      e[3] = sq(a[0] + a[1]);
      e[4] = sq(a[1] + a[3]);
      e[5] = sq(a[0] + a[2]);
      for (int k = 0; k < N_Q; k++) e[6+k] = sq(a[k]);
      @(posedge clk);
      for (int k = 0; k < N_SQ; k++) begin
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
