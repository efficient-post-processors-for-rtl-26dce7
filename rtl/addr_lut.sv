// addr_lut: address lookup table of one processing element.
//
// Each processing element (PE) serves one block column COL of the base matrix.
// For the layer being processed (a block row), this table says whether the
// column takes part (valid), the cyclic shift of its Z x Z block, and where in
// the PE's c2v memory the block's messages live. Addresses are compacted over
// the non-zero blocks of the column, so the memory holds only as many words as
// the column has non-zero blocks. The contents are derived at elaboration time
// from the base matrix in ldpc_pkg; the table is purely combinational.
//
// The paper names the lookup table and says read/write addresses are kept in
// lookup tables; the compacted addressing and storing the shift here are this
// design's choices.
module addr_lut
  import ldpc_pkg::*;
#(
  parameter int unsigned Z   = ZMAX,
  parameter int unsigned COL = 0
) (
  input  logic [1:0]    layer,
  output logic          valid,
  output logic [SW-1:0] shift,
  output logic [1:0]    addr
);

  logic [MB-1:0]        vtab;
  logic [SW-1:0]        stab [MB];
  logic [1:0]           atab [MB];

  for (genvar r = 0; r < MB; r++) begin : g_row
    assign vtab[r] = hb_valid(r, COL);
    assign stab[r] = SW'(hb_shift(r, COL, Z));
    assign atab[r] = 2'(hb_addr(r, COL));
  end

  always_comb begin
    valid = vtab[layer];
    shift = stab[layer];
    addr  = atab[layer];
  end

endmodule
