// rotmat_pkg: widths and output ordering shared by the quaternion-to-rotation-matrix unit.
//
// The unit takes a quaternion q = [q0 q1 q2 q3] of QW-bit two's-complement integers and
// returns the nine entries of the 3x3 rotation (direction cosine) matrix as exact integers:
// no bit of any intermediate result is dropped. With q in Q1.(QW-1) fixed point, every entry
// comes out in fixed point with 2*(QW-1) fraction bits.
//
// Widths (all derived from QW, which the published design leaves open; 16 is this design's choice):
//   sum_w  = QW+1     a sum of two coefficients
//   sq_w   = 2*QW+1   a square of such a sum, unsigned (|sum| <= 2^QW, square <= 2^(2QW))
//   cw     = 2*QW+3   signed word of blocks 2..4; the largest intermediate, phi_a + phi_b,
//                     reaches 2^(2QW+1), which needs 2QW+3 signed bits
//
// The nine outputs of block 4 follow the order printed at the right of the overall
// structure diagram: c01 c02 c10 c12 c20 c21 c00 c11 c22 (entry_e below).
package rotmat_pkg;

  localparam int unsigned QW_DEFAULT = 16;

  function automatic int unsigned sum_w(int unsigned qw);
    return qw + 1;
  endfunction

  function automatic int unsigned sq_w(int unsigned qw);
    return 2 * qw + 1;
  endfunction

  function automatic int unsigned cw(int unsigned qw);
    return 2 * qw + 3;
  endfunction

  // Position of each matrix entry on the output side of block 4.
  typedef enum logic [3:0] {
    E_C01 = 4'd0, E_C02 = 4'd1, E_C10 = 4'd2, E_C12 = 4'd3, E_C20 = 4'd4,
    E_C21 = 4'd5, E_C00 = 4'd6, E_C11 = 4'd7, E_C22 = 4'd8
  } entry_e;

  localparam int unsigned N_Q    = 4;   // quaternion coefficients
  localparam int unsigned N_SQ   = 10;  // squares leaving block 1
  localparam int unsigned N_MID  = 10;  // words between blocks 2-3 and 3-4
  localparam int unsigned N_C    = 9;   // matrix entries

endpackage
