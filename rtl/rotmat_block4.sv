// rotmat_block4: fourth block -- the off-diagonal entries.
//
// Each off-diagonal entry 2(q_a q_b +/- q_c q_d) is a sum or difference of two phi values
// minus the matching single squares (Logan's identity). Block 2 already paired the phis;
// here one more adder per entry removes the squares. For the three "+" entries the
// correction is lambda; for the three "-" entries it is exactly one of the diagonal
// entries:
//
//   o[0] = c01 = (phi0 - phi1) + c22    = 2(q1q2 - q0q3)
//   o[1] = c02 = (phi4 + phi5) - lambda = 2(q0q2 + q1q3)
//   o[2] = c10 = (phi0 + phi1) - lambda = 2(q1q2 + q0q3)
//   o[3] = c12 = (phi2 - phi3) + c00    = 2(q2q3 - q0q1)
//   o[4] = c20 = (phi4 - phi5) + c11    = 2(q1q3 - q0q2)
//   o[5] = c21 = (phi2 + phi3) - lambda = 2(q0q1 + q2q3)
//   o[6..8] = c00, c11, c22 (passed through)
//
// The output order, six adders plus three pass-through outputs, and the formulas of c01
// and c10 follow the published design. The other four adders take different operands than the
// published design's, whose formulas for them do not give the matrix it starts from (see the
// README for the comparison).
//
// Interface: i[0..9] signed 2*QW+3 bits from block 3; o[0..8] signed 2*QW+3 bits, in the
// order of rotmat_pkg::entry_e. Combinational.
module rotmat_block4
  import rotmat_pkg::*;
#(
  parameter int unsigned QW = QW_DEFAULT
) (
  input  logic signed [cw(QW)-1:0] i [N_MID],
  output logic signed [cw(QW)-1:0] o [N_C]
);

  always_comb begin
    o[E_C01] = i[0] + i[9];
    o[E_C02] = i[4] - i[6];
    o[E_C10] = i[1] - i[6];
    o[E_C12] = i[3] + i[7];
    o[E_C20] = i[5] + i[8];
    o[E_C21] = i[2] - i[6];
    o[E_C00] = i[7];
    o[E_C11] = i[8];
    o[E_C22] = i[9];
  end

endmodule
