// rotmat_unit: quaternion to 3x3 rotation matrix, using squarers instead of multipliers.
//
// Every entry of the rotation matrix of q = [q0 q1 q2 q3] is either a signed sum of the
// four squares q_k^2 (diagonal) or twice a sum/difference of two products q_a*q_b
// (off-diagonal). Logan's identity, 2ab = (a+b)^2 - a^2 - b^2, turns each of those
// products into squares, so the whole matrix needs 10 squarers (6 squared pair sums and
// the 4 single squares) and 26 adders, and no multiplier.
//
// The unit is the cascade of four blocks of the published design's overall diagram:
//   block 1  6 pair sums, 10 squarers
//   block 2  10 adders: phi pair sums/differences, square pair sums/differences
//   block 3  4 adders: c00, c11, c22 and lambda = sum of the four squares
//   block 4  6 adders: the off-diagonal entries
// A register bank after every block makes a 4-stage pipeline (this design's choice; the
// published design shows no registers): one quaternion per clock, result 4 clocks later.
//
// Interface (all synchronous to clk, active-low synchronous reset):
//   in_valid, q[0..3]   a new quaternion, signed QW-bit integers (Q1.(QW-1) for unit q)
//   out_valid, c[r][s]  the matrix, row r, column s, signed 2*QW+3-bit exact integers;
//                       for Q1.(QW-1) input they carry 2*(QW-1) fraction bits
// out_valid follows in_valid exactly 4 cycles later; there is no back-pressure. Only the
// valid bits are reset; the data registers hold whatever passed last.
module rotmat_unit
  import rotmat_pkg::*;
#(
  parameter int unsigned QW = QW_DEFAULT
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [QW-1:0]     q [N_Q],
  output logic                     out_valid,
  output logic signed [cw(QW)-1:0] c [3][3]
);

  localparam int unsigned LATENCY = 4;

  // Combinational outputs of each block and the register banks that follow them.
  logic        [sq_w(QW)-1:0] b1_o [N_SQ];
  logic        [sq_w(QW)-1:0] r1   [N_SQ];
  logic signed [cw(QW)-1:0]   b2_o [N_MID];
  logic signed [cw(QW)-1:0]   r2   [N_MID];
  logic signed [cw(QW)-1:0]   b3_o [N_MID];
  logic signed [cw(QW)-1:0]   r3   [N_MID];
  logic signed [cw(QW)-1:0]   b4_o [N_C];
  logic signed [cw(QW)-1:0]   r4   [N_C];
  logic        [LATENCY-1:0]  vld;

  rotmat_block1 #(.QW(QW)) u_block1 (.q(q),  .o(b1_o));
  rotmat_block2 #(.QW(QW)) u_block2 (.i(r1), .o(b2_o));
  rotmat_block3 #(.QW(QW)) u_block3 (.i(r2), .o(b3_o));
  rotmat_block4 #(.QW(QW)) u_block4 (.i(r3), .o(b4_o));

  always_ff @(posedge clk) begin
    r1 <= b1_o;
    r2 <= b2_o;
    r3 <= b3_o;
    r4 <= b4_o;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LATENCY-2:0], in_valid};
  end

  assign out_valid = vld[LATENCY-1];

  // Block 4 delivers the entries in the order c01 c02 c10 c12 c20 c21 c00 c11 c22.
  always_comb begin
    c[0][0] = r4[E_C00];  c[0][1] = r4[E_C01];  c[0][2] = r4[E_C02];
    c[1][0] = r4[E_C10];  c[1][1] = r4[E_C11];  c[1][2] = r4[E_C12];
    c[2][0] = r4[E_C20];  c[2][1] = r4[E_C21];  c[2][2] = r4[E_C22];
  end

endmodule
