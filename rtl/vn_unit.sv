// vn_unit: Z variable-node lanes of one processing element (layered min-sum).
//
// Each lane keeps the posterior LLR of one variable node of the PE's block
// column. In a layer cycle it forms the VC message q = Lps - r_old, where r_old
// is the c2v message this layer sent last iteration, and (when 'upd' is high)
// writes back Lps <= (Lps - r_old) + r_new with r_new the fresh c2v message.
// The VC message handed to the check nodes is saturated to Q5.0 (+-15); the
// posterior is kept at 8 bits. This is the layered form of the paper's
// posterior and VC-message equations.
//
// Soft bit flipping (focused heating): a lane whose 'flip' bit is high keeps
// the sign of its posterior but its magnitude drops to B0: Lps <= sgn(Lps)*B0.
// This follows the paper's definition of soft bit flipping as reducing the
// reliability of the soft decision to a low value B0; a hard sign inversion
// was not used (it made the plural set grow from one iteration to the next).
//
// 'load' writes the channel priors (one Q5.0 value per lane); load has priority
// over flip, flip over update. All updates happen on the rising clock edge;
// q and hard are combinational from the posterior register.
module vn_unit
  import ldpc_pkg::*;
#(
  parameter int unsigned Z = ZMAX
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  msg_t  [Z-1:0]        prior,
  input  msg_t  [Z-1:0]        r_old,
  output msg_t  [Z-1:0]        q,
  input  logic                 upd,
  input  msg_t  [Z-1:0]        r_new,
  input  logic  [Z-1:0]        flip,
  input  logic  [QW-2:0]       b0,
  output post_t [Z-1:0]        post,
  output logic  [Z-1:0]        hard
);

  post_t [Z-1:0] lps;
  int            q_full [Z];

  always_comb begin
    for (int i = 0; i < Z; i++) begin
      q_full[i] = int'(lps[i]) - int'(r_old[i]);
      q[i]      = sat_msg(q_full[i]);
      hard[i]   = lps[i][PW-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lps <= '0;
    end else begin
      for (int i = 0; i < Z; i++) begin
        if (load)
          lps[i] <= post_t'(prior[i]);
        else if (flip[i])
          lps[i] <= lps[i][PW-1] ? -post_t'(b0) : post_t'(b0);
        else if (upd)
          lps[i] <= sat_post(q_full[i] + int'(r_new[i]));
      end
    end
  end

  assign post = lps;

endmodule
