// rotmat_block1: first block of the unit -- pairwise sums and ten squarings.
//
// Out of the four quaternion coefficients it forms the six pairwise sums and squares
// them, and squares each coefficient on its own. These ten squares are the only
// nonlinear operations of the whole unit; every product q_a*q_b of the rotation matrix
// is later recovered from them with Logan's identity 2ab = (a+b)^2 - a^2 - b^2.
//
//   o[0] = phi0 = (q1+q2)^2     o[6] = q0^2
//   o[1] = phi1 = (q0+q3)^2     o[7] = q1^2
//   o[2] = phi2 = (q2+q3)^2     o[8] = q2^2
//   o[3] = phi3 = (q0+q1)^2     o[9] = q3^2
//   o[4] = phi4 = (q1+q3)^2
//   o[5] = phi5 = (q0+q2)^2
//
// 6 adders and 10 squarers, as in the published design's block diagram; the phi definitions are the
// published design's. Which output carries which single square is not legible there and is this
// design's choice (coefficient order). All ten squarers have the same QW+1-bit input, so
// the four single coefficients are sign-extended by one bit.
//
// Interface: q[0..3] signed QW bits; o[0..9] unsigned 2*QW+1 bits. Combinational.
module rotmat_block1
  import rotmat_pkg::*;
#(
  parameter int unsigned QW = QW_DEFAULT
) (
  input  logic signed [QW-1:0]       q [N_Q],
  output logic        [sq_w(QW)-1:0] o [N_SQ]
);

  localparam int unsigned SW = sum_w(QW);

  // Operand of each squarer: the pair sums first, then the coefficients themselves.
  logic signed [SW-1:0] sq_in [N_SQ];

  always_comb begin
    sq_in[0] = SW'(q[1]) + SW'(q[2]);
    sq_in[1] = SW'(q[0]) + SW'(q[3]);
    sq_in[2] = SW'(q[2]) + SW'(q[3]);
    sq_in[3] = SW'(q[0]) + SW'(q[1]);
    sq_in[4] = SW'(q[1]) + SW'(q[3]);
    sq_in[5] = SW'(q[0]) + SW'(q[2]);
    for (int k = 0; k < N_Q; k++) sq_in[6+k] = SW'(q[k]);
  end

  for (genvar k = 0; k < N_SQ; k++) begin : g_sq
    squarer #(.IW(SW)) u_sq (.x(sq_in[k]), .y(o[k]));
  end

endmodule
