// barrel_shifter: cyclic rotation of a vector of Z elements of W bits.
//
// Forward (INVERSE = 0): dout[r] = din[(r + shift) mod Z]. This takes the VC
// messages of a PE, which are in variable-node order, to the order of the
// check rows of the current block (a block with shift x joins row r to column
// (r + x) mod Z). Inverse (INVERSE = 1): dout[(r + shift) mod Z] = din[r],
// which brings c2v messages back to variable-node order. 'shift' must be < Z.
// Combinational; the rotation is a shift of the vector concatenated with itself.
module barrel_shifter
  import ldpc_pkg::*;
#(
  parameter int unsigned Z       = ZMAX,
  parameter int unsigned W       = QW,
  parameter bit          INVERSE = 1'b0
) (
  input  logic [Z-1:0][W-1:0] din,
  input  logic [SW-1:0]       shift,
  output logic [Z-1:0][W-1:0] dout
);

  logic [2*Z*W-1:0] dbl;
  logic [SW-1:0]    amt;

  always_comb begin
    dbl  = {din, din};
    amt  = INVERSE ? ((shift == '0) ? '0 : SW'(Z) - shift) : shift;
    dout = dbl[32'(amt)*W +: Z*W];
  end

endmodule
