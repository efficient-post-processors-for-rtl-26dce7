// check_node: offset min-sum check node for one parity check (row) of a layer.
//
// Up to DC inputs, one per block column; 'en' marks the columns that hold a
// non-zero block in this layer. The node finds the smallest and second smallest
// VC magnitude among enabled inputs and the product of their signs. Input i
// gets back min-over-others (min2 if i holds the minimum, else min1), reduced
// by OFFSET and floored at 0, with sign = product of the other inputs' signs.
// Every output also carries 'sat', the unmarginalised sign product (1 = check
// satisfied), which the post-processor uses to find the neighborhood set.
// Disabled outputs are 0 with sat = 1. Combinational.
//
// The min-sum rule and the sat flag follow the paper; the offset correction and
// its value of 1 LSB are this design's choice (the paper allows an offset or a
// normalisation without giving one). The search is written as a linear scan.
module check_node
  import ldpc_pkg::*;
#(
  parameter int unsigned DC     = NB,
  parameter int unsigned OFFSET = 1
) (
  input  msg_t [DC-1:0] q,
  input  logic [DC-1:0] en,
  output c2v_t [DC-1:0] r
);

  logic [QW-1:0] mag [DC];
  logic [QW-1:0] min1, min2, m;
  logic [$clog2(DC)-1:0] idx;
  logic          sgn;

  always_comb begin
    min1 = QW'(MSG_MAX);
    min2 = QW'(MSG_MAX);
    idx  = '0;
    sgn  = 1'b0;
    for (int i = 0; i < DC; i++) begin
      mag[i] = q[i][QW-1] ? QW'(-q[i]) : QW'(q[i]);
      if (en[i]) begin
        sgn = sgn ^ q[i][QW-1];
        if (mag[i] < min1) begin
          min2 = min1;
          min1 = mag[i];
          idx  = ($clog2(DC))'(i);
        end else if (mag[i] < min2) begin
          min2 = mag[i];
        end
      end
    end
    for (int i = 0; i < DC; i++) begin
      m = (($clog2(DC))'(i) == idx) ? min2 : min1;
      m = (m > QW'(OFFSET)) ? m - QW'(OFFSET) : '0;
      if (en[i]) begin
        r[i].sat = ~sgn;
        r[i].msg = (sgn ^ q[i][QW-1]) ? -msg_t'(m) : msg_t'(m);
      end else begin
        r[i].sat = 1'b1;
        r[i].msg = '0;
      end
    end
  end

endmodule
