// label_mem: neighborhood label memory of one processing element.
//
// One entry per logical variable node of the PE's block column (Z entries).
// The paper keeps a single label bit per VN (set when the VN neighbours an
// unsatisfied check). Focused heating also needs to know which VNs neighbour
// more than one unsatisfied check (plural-bit candidates), so each entry here
// is a 2-bit saturating count of unsatisfied neighbouring checks:
// count >= 1 is the neighborhood label, count >= 2 marks a plural-bit candidate.
//
// The memory is double-buffered. During an iteration 'inc' adds one to the
// accumulating count of each flagged lane (once per layer). 'commit' (the last
// cycle of an iteration) copies the accumulated counts to 'cur' and clears the
// accumulator, so the labels used in an iteration are those found in the
// previous one. 'clear' zeroes both at the start of a frame.
module label_mem
  import ldpc_pkg::*;
#(
  parameter int unsigned Z = ZMAX
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [Z-1:0]         inc,
  input  logic                 commit,
  output logic [Z-1:0][1:0]    cur,
  output logic [Z-1:0][1:0]    acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0;
      acc <= '0;
    end else if (clear) begin
      cur <= '0;
      acc <= '0;
    end else if (commit) begin
      cur <= acc;
      acc <= '0;
    end else begin
      for (int i = 0; i < Z; i++)
        if (inc[i] && acc[i] != 2'd3) acc[i] <= acc[i] + 2'd1;
    end
  end

endmodule
