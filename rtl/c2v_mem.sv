// c2v_mem: check-to-variable message memory of one processing element.
//
// Holds, for every non-zero block of the PE's block column, the Z c2v messages
// last produced by the check nodes for that block, each with its check's
// unmarginalised 'sat' flag (1 = parity check satisfied). The flag is what the
// post-processing controller inspects to tag neighborhood bits and to decide
// which VC messages to reweight.
//
// Interface: combinational read (raddr -> rdata), synchronous write (we,
// waddr, wdata) on the rising clock edge, and a synchronous 'clear' that sets
// every word to message 0 with sat = 1, used at the start of each frame.
// 'zero_lanes' sets the messages (not the sat flags) of the flagged lanes to 0
// in every word; it is used when those variable nodes are soft-flipped, so that
// they restart from the flipped value without old check messages. A
// read and a write of the same word in one cycle returns the old word. The
// memory is a register array so a whole layer can be read and written in one
// cycle; the paper's FPGA decoder used block RAM.
module c2v_mem
  import ldpc_pkg::*;
#(
  parameter int unsigned Z     = ZMAX,
  parameter int unsigned DEPTH = MB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [1:0]           raddr,
  output c2v_t [Z-1:0]         rdata,
  input  logic                 we,
  input  logic [1:0]           waddr,
  input  c2v_t [Z-1:0]         wdata,
  input  logic [Z-1:0]         zero_lanes
);

  c2v_t [Z-1:0] mem [DEPTH];

  localparam c2v_t C2V_INIT = '{sat: 1'b1, msg: '0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < DEPTH; d++) mem[d] <= {Z{C2V_INIT}};
    end else if (clear) begin
      for (int d = 0; d < DEPTH; d++) mem[d] <= {Z{C2V_INIT}};
    end else if (zero_lanes != '0) begin
      for (int d = 0; d < DEPTH; d++)
        for (int i = 0; i < Z; i++)
          if (zero_lanes[i]) mem[d][i].msg <= '0;
    end else if (we && (32'(waddr) < DEPTH)) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = (32'(raddr) < DEPTH) ? mem[raddr] : {Z{C2V_INIT}};

endmodule
