// pp_controller: post-processing controller of one processing element.
//
// Purely combinational, Z lanes. It performs the three per-VN functions of the
// post-processor, serially over the layers:
//  * labeling: in a layer cycle of a participating column, every lane whose
//    check reported 'unsatisfied' (sat_new = 0, straight from the check nodes)
//    raises 'inc' so the label memory counts one more unsatisfied neighbour;
//  * reweighting (extended heating): during a heating iteration a lane whose
//    label is on (count >= 1, the paper's NAND over the sat bits) AND whose
//    check was satisfied (sat_rd, read with the old c2v message) raises 'rw_en',
//    which makes the PE's mux send A0*sgn(q) instead of q;
//  * plural-bit selection (focused heating): in the last cycle of an iteration
//    that precedes a constraining iteration ('flip_now'), lanes whose just
//    finished count is >= 2 raise 'flip_en' for a soft bit flip.
// Labeling and reweighting follow the paper; taking the labeling sat bits from
// the check nodes' fresh output and the plural threshold from a 2-bit count are
// this design's choices.
module pp_controller
  import ldpc_pkg::*;
#(
  parameter int unsigned Z = ZMAX
) (
  input  logic                 act,        // layer cycle, column participates
  input  logic                 heat,       // heating iteration
  input  logic                 flip_now,   // end of iteration before constraining
  input  logic [Z-1:0]         sat_rd,
  input  logic [Z-1:0]         sat_new,
  input  logic [Z-1:0][1:0]    label_cur,
  input  logic [Z-1:0][1:0]    label_acc,
  output logic [Z-1:0]         inc,
  output logic [Z-1:0]         rw_en,
  output logic [Z-1:0]         flip_en
);

  // One continuous assignment per output: inc depends on the check-node
  // result, which itself depends on rw_en, so the three are kept apart.
  for (genvar i = 0; i < Z; i++) begin : g_lane
    assign inc[i]     = act & ~sat_new[i];
    assign rw_en[i]   = act & heat & (label_cur[i] != 2'd0) & sat_rd[i];
    assign flip_en[i] = flip_now & (label_acc[i] >= 2'd2);
  end

endmodule
