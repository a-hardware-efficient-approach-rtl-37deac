// rotmat_block2: second block -- first level of additions.
//
// The six squared sums are taken in their three natural pairs and both the sum and the
// difference of each pair are formed; the four single squares are combined into two
// sums and two differences:
//
//   o[0] = phi0 - phi1          o[6] = th0 = q1^2 + q2^2
//   o[1] = phi0 + phi1          o[7] = th1 = q0^2 + q3^2
//   o[2] = phi2 + phi3          o[8] = d0  = q0^2 - q3^2
//   o[3] = phi2 - phi3          o[9] = d1  = q1^2 - q2^2
//   o[4] = phi4 + phi5
//   o[5] = phi4 - phi5
//
// Block diagram versus this design. The first six adders keep the published design's order and its
// sign pattern (difference, sum, sum, difference, sum, difference). The pairing of phi4
// with phi5 for a difference replaces the published design's phi1 - phi5, and the square part has
// four adders where the published design has five: the published design's formulas for c00, c11, c12, c20,
// c21 and c02 do not reproduce the rotation matrix it starts from, and the corrected
// network needs one adder fewer here (10 instead of 11).
//
// Interface: i[0..9] unsigned 2*QW+1 bits from block 1 (phi0..phi5, q0^2..q3^2);
// o[0..9] signed 2*QW+3 bits. Combinational.
module rotmat_block2
  import rotmat_pkg::*;
#(
  parameter int unsigned QW = QW_DEFAULT
) (
  input  logic        [sq_w(QW)-1:0] i [N_SQ],
  output logic signed [cw(QW)-1:0]   o [N_MID]
);

  localparam int unsigned W = cw(QW);

  // Zero-extend the (non-negative) squares into the signed working width.
  logic signed [W-1:0] v [N_SQ];

  always_comb begin
    for (int k = 0; k < N_SQ; k++) v[k] = W'(i[k]);
    o[0] = v[0] - v[1];
    o[1] = v[0] + v[1];
    o[2] = v[2] + v[3];
    o[3] = v[2] - v[3];
    o[4] = v[4] + v[5];
    o[5] = v[4] - v[5];
    o[6] = v[7] + v[8];   // q1^2 + q2^2
    o[7] = v[6] + v[9];   // q0^2 + q3^2
    o[8] = v[6] - v[9];   // q0^2 - q3^2
    o[9] = v[7] - v[8];   // q1^2 - q2^2
  end

endmodule
