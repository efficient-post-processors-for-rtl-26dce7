// syndrome_check: parity of all MB*Z checks from the hard decisions.
//
// hard[c][i] is the decision on variable node c*Z+i (1 = negative posterior).
// Check k of block row r is the XOR over the non-zero blocks (r, c) of
// hard[c][(k + shift) mod Z]. 'ok' is high when every check is satisfied, that
// is, the hard decisions form a codeword and decoding can stop; n_unsat counts
// the failed checks. Combinational; the rotations are fixed wiring.
// The decoder stops on a satisfied syndrome and enters post-processing on a
// failed one after M iterations, as the paper describes; computing it from the
// posterior signs once per iteration is this design's choice.
module syndrome_check
  import ldpc_pkg::*;
#(
  parameter int unsigned Z = ZMAX
) (
  input  logic [NB-1:0][Z-1:0] hard,
  output logic                 ok,
  output logic [15:0]          n_unsat
);

  logic [MB-1:0][Z-1:0] par;

  for (genvar r = 0; r < MB; r++) begin : g_row
    logic [NB-1:0][Z-1:0] rot;
    for (genvar c = 0; c < NB; c++) begin : g_col
      localparam int unsigned S = hb_shift(r, c, Z);
      if (hb_valid(r, c)) begin : g_nz
        for (genvar k = 0; k < Z; k++) begin : g_k
          assign rot[c][k] = hard[c][(k + S) % Z];
        end
      end else begin : g_z
        assign rot[c] = '0;
      end
    end
    always_comb begin
      par[r] = '0;
      for (int c = 0; c < NB; c++) par[r] = par[r] ^ rot[c];
    end
  end

  always_comb begin
    n_unsat = '0;
    for (int r = 0; r < MB; r++)
      for (int k = 0; k < Z; k++) n_unsat = n_unsat + 16'(par[r][k]);
    ok = (n_unsat == '0);
  end

endmodule
