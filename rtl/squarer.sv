// squarer: dedicated single-operand squaring unit, y = x*x.
//
// A square needs only one operand, so its partial-product array can be folded: of the
// products x_i*x_j and x_j*x_i only one is kept, shifted one place further, and x_i*x_i
// is just x_i. Row i of the array is therefore
//     a_i * ( 2^(2i) + sum_{j>i} a_j * 2^(i+j+1) )
// where a = |x|. The triangle has about half the bits of a full IW x IW multiplier
// array, which is where the area and power advantage of a squarer over a multiplier comes
// from. The rows are summed here with plain word adders; a synthesis tool is free to
// rebuild that as a carry-save tree.
//
// Interface: x is a signed IW-bit operand, y the unsigned 2*IW-1-bit square (the most
// negative x, -2^(IW-1), gives 2^(2IW-2), the largest value). Purely combinational.
//
// Using a dedicated squarer instead of a multiplier with tied inputs follows the published design
// design; the folded-array construction and the sign handling (square of the magnitude)
// are this implementation's choice.
module squarer #(
  parameter int unsigned IW = 17
) (
  input  logic signed [IW-1:0]   x,
  output logic        [2*IW-2:0] y
);

  localparam int unsigned OW = 2 * IW - 1;

  logic [IW-1:0] a;   // magnitude; -2^(IW-1) wraps to itself, read as unsigned 2^(IW-1)

  always_comb a = x[IW-1] ? IW'(-x) : IW'(x);

  always_comb begin
    logic [OW-1:0] row;
    logic [OW-1:0] acc;
    acc = '0;
    for (int i = 0; i < IW; i++) begin
      row = '0;
      if (a[i]) begin
        row[2*i] = 1'b1;
        for (int j = i + 1; j < IW; j++) row[i+j+1] = a[j];
      end
      acc = acc + row;
    end
    y = acc;
  end

endmodule
