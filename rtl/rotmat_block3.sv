// rotmat_block3: third block -- diagonal entries and the sum of all squares.
//
// The six phi combinations from block 2 pass straight through. The four square
// combinations th0, th1, d0, d1 are added pairwise into the three diagonal entries of the
// rotation matrix and into lambda, the sum of all four squares:
//
//   o[0..5] = i[0..5]
//   o[6] = lambda = th1 + th0 = q0^2 + q1^2 + q2^2 + q3^2
//   o[7] = c00    = d0  + d1  = q0^2 + q1^2 - q2^2 - q3^2
//   o[8] = c11    = d0  - d1  = q0^2 - q1^2 + q2^2 - q3^2
//   o[9] = c22    = th1 - th0 = q0^2 - q1^2 - q2^2 + q3^2
//
// The pass-through of the first six words and the role of the block (the final step for
// the diagonal and lambda) follow the published design's block diagram; lambda and c22 are formed
// exactly as there. The published design forms c00 and c11 from q0^2 - q2^2 and q0^2 - q3^2, which
// does not give the diagonal of the matrix it starts from, so they are formed here from
// d0 and d1. That needs 4 adders instead of the published design's 6, and no extra correction words
// for block 4: c00, c11 and c22 double as the corrections of c12, c20 and c01.
//
// Interface: i[0..9], o[0..9] signed 2*QW+3 bits. Combinational.
module rotmat_block3
  import rotmat_pkg::*;
#(
  parameter int unsigned QW = QW_DEFAULT
) (
  input  logic signed [cw(QW)-1:0] i [N_MID],
  output logic signed [cw(QW)-1:0] o [N_MID]
);

  always_comb begin
    for (int k = 0; k < 6; k++) o[k] = i[k];
    o[6] = i[7] + i[6];
    o[7] = i[8] + i[9];
    o[8] = i[8] - i[9];
    o[9] = i[7] - i[6];
  end

endmodule
