// tb_rotmat_unit: end-to-end test of the pipelined quaternion-to-rotation-matrix unit.
//
// Runs the unit at its default parameters (QW = 16). A stream of quaternions is applied
// with random idle cycles between them: random 16-bit quaternions, the extreme corners of
// the input range, and unit quaternions of known rotations in Q1.15. For each accepted
// quaternion the expected matrix is worked out with 64-bit products straight from the
// rotation-matrix formula and queued together with the cycle it entered; each result
// must come out exact and exactly 4 cycles later, with out_valid high on those cycles
// only. For the known rotations the result, read as Q2.30, is also compared with the
// ideal matrix (0, +1 or -1) within a rounding tolerance.
//
// Mechanisms counted, each of which must occur: back-to-back inputs (one quaternion per
// clock), idle cycles in the input stream, out_valid held low by reset, the extreme
// corners of the input range, and the known rotations.
module tb_rotmat_unit;
  import rotmat_pkg::*;

  localparam int unsigned QW      = QW_DEFAULT;
  localparam int unsigned CW      = cw(QW);
  localparam longint      LATENCY = 4;
  localparam int          N       = 20000;

  typedef struct {
    longint c [3][3];
    longint cycle;
    int     kind;      // 0 random, 1 corner, 2 known rotation
    int     rot;       // index of the known rotation
  } exp_t;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [QW-1:0] q [N_Q];
  logic out_valid;
  logic signed [CW-1:0] c [3][3];

  int     checks = 0, failures = 0;
  longint cycle = 0;
  exp_t   fifo [$];
  int     n_b2b = 0, n_idle = 0, n_rst_quiet = 0, n_corner = 0, n_rot = 0, n_out = 0;

  rotmat_unit dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .q(q),
    .out_valid(out_valid), .c(c)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (4 * N + 1000) @(posedge clk);
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Known rotations as Q1.15 unit quaternions (cos/sin of 45 degrees = 23170/32768)
  // and the ideal matrices they give.
  localparam int NROT = 4;
  localparam longint H = 23170;
  localparam longint ONE = 64'sd1 <<< 30;
  longint rot_q [NROT][4] = '{
    '{32767, 0, 0, 0},        // identity
    '{H, 0, 0, H},            // +90 degrees about z
    '{H, H, 0, 0},            // +90 degrees about x
    '{0, 0, 32767, 0}         // 180 degrees about y
  };
  int rot_m [NROT][3][3] = '{
    '{'{1, 0, 0}, '{0, 1, 0}, '{0, 0, 1}},
    '{'{0, -1, 0}, '{1, 0, 0}, '{0, 0, 1}},
    '{'{1, 0, 0}, '{0, 0, -1}, '{0, 1, 0}},
    '{'{-1, 0, 0}, '{0, 1, 0}, '{0, 0, -1}}
  };

  function automatic void ref_matrix(input longint a [4], output longint m [3][3]);
    m[0][0] = a[0]*a[0] + a[1]*a[1] - a[2]*a[2] - a[3]*a[3];
    m[0][1] = 2 * (a[1]*a[2] - a[0]*a[3]);
    m[0][2] = 2 * (a[0]*a[2] + a[1]*a[3]);
    m[1][0] = 2 * (a[1]*a[2] + a[0]*a[3]);
    m[1][1] = a[0]*a[0] - a[1]*a[1] + a[2]*a[2] - a[3]*a[3];
    m[1][2] = 2 * (a[2]*a[3] - a[0]*a[1]);
    m[2][0] = 2 * (a[1]*a[3] - a[0]*a[2]);
    m[2][1] = 2 * (a[0]*a[1] + a[2]*a[3]);
    m[2][2] = a[0]*a[0] - a[1]*a[1] - a[2]*a[2] + a[3]*a[3];
  endfunction

  // Output side: compare every valid result with the head of the queue.
  always @(posedge clk) begin
    if (!rst_n) begin
      checks++;
      if (out_valid) begin
        failures++;
        $display("out_valid high during reset");
      end else n_rst_quiet++;
    end else if (out_valid) begin
      exp_t e;
      n_out++;
      checks++;
      if (fifo.size() == 0) begin
        failures++;
        $display("cycle %0d: unexpected out_valid", cycle);
      end else begin
        e = fifo.pop_front();
        if (cycle - e.cycle != LATENCY) begin
          failures++;
          $display("cycle %0d: latency %0d, expected %0d", cycle, cycle - e.cycle, LATENCY);
        end
        for (int r = 0; r < 3; r++)
          for (int s = 0; s < 3; s++) begin
            checks++;
            if (longint'(c[r][s]) != e.c[r][s]) begin
              failures++;
              if (failures < 20)
                $display("cycle %0d: c[%0d][%0d]=%0d expected %0d", cycle, r, s, c[r][s],
                         e.c[r][s]);
            end
            if (e.kind == 2) begin
              longint d;
              checks++;
              d = longint'(c[r][s]) - longint'(rot_m[e.rot][r][s]) * ONE;
              if (d < 0) d = -d;
              if (d > (ONE >>> 12)) begin
                failures++;
                $display("rotation %0d: c[%0d][%0d]=%0d not near %0d", e.rot, r, s,
                         c[r][s], rot_m[e.rot][r][s]);
              end
            end
          end
        if (e.kind == 1) n_corner++;
        if (e.kind == 2) n_rot++;
      end
    end else begin
      checks++;
      if (fifo.size() != 0 && cycle - fifo[0].cycle >= LATENCY) begin
        failures++;
        $display("cycle %0d: result overdue", cycle);
      end
    end
  end

  initial begin
    longint a [4];
    exp_t   e;
    bit     prev_valid;
    prev_valid = 1'b0;
    for (int k = 0; k < N_Q; k++) q[k] = '0;
    repeat (5) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < N; n++) begin
      // Random idle cycles between inputs; runs of back-to-back inputs in between.
      if ($urandom_range(3) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
        prev_valid = 1'b0;
        n_idle++;
        @(posedge clk);
      end
      @(negedge clk);
      e.kind = 0;
      e.rot  = 0;
      if (n < NROT) begin
        e.kind = 2;
        e.rot  = n;
        for (int k = 0; k < 4; k++) a[k] = rot_q[n][k];
      end else if (n % 500 == 7) begin
        e.kind = 1;
        for (int k = 0; k < 4; k++)
          a[k] = ($urandom_range(1) == 0) ? -(64'sd1 <<< (QW-1)) : (64'sd1 <<< (QW-1)) - 1;
      end else begin
        for (int k = 0; k < 4; k++) a[k] = longint'($signed(QW'($urandom)));
      end
      for (int k = 0; k < 4; k++) q[k] = QW'(a[k]);
      in_valid = 1'b1;
      if (prev_valid) n_b2b++;
      prev_valid = 1'b1;
      ref_matrix(a, e.c);
      @(posedge clk);
      e.cycle = cycle;
      fifo.push_back(e);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (int'(LATENCY) + 2) @(posedge clk);
    checks++;
    if (fifo.size() != 0 || n_out != N) begin
      failures++;
      $display("%0d results missing", N - n_out);
    end
    $display("mechanisms: back_to_back=%0d idle_cycles=%0d reset_quiet=%0d corners=%0d rotations=%0d",
             n_b2b, n_idle, n_rst_quiet, n_corner, n_rot);
    if (n_b2b == 0)      begin failures++; $display("no back-to-back inputs"); end
    if (n_idle == 0)     begin failures++; $display("no idle cycles"); end
    if (n_rst_quiet == 0) begin failures++; $display("reset never observed"); end
    if (n_corner == 0)   begin failures++; $display("no corner inputs"); end
    if (n_rot != NROT)   begin failures++; $display("known rotations not all seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
