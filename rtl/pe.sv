// pe: processing element for one block column COL of the base matrix.
//
// Combines the address lookup table, c2v memory, Z variable-node lanes, the
// post-processing controller, the label memory and the A0 reweighting mux.
// In a layer cycle where the column holds a non-zero block (valid), the PE
// reads the old c2v messages of this block, forms the VC messages q (lane =
// variable node order), and outputs v2c_pp, where a lane selected by the
// controller carries A0*sgn(q) (sgn(0) taken as +1) instead of q. The
// surrounding decoder rotates v2c_pp by 'shift', runs the check nodes and
// rotates the answer back into c2v_in within the same cycle; on the clock
// edge the PE stores c2v_in, updates the posteriors and counts unsatisfied
// checks into the label memory. In the iteration's check cycle the labels are
// committed and, if requested, plural bits are soft-flipped: the posterior of
// such a lane becomes sgn(Lps)*B0 and its stored c2v messages are cleared, so
// in the layered schedule the node restarts from the weak flipped value alone.
// (The paper only says the reliability of the soft decision is reduced to B0;
// clearing the stored messages is this design's way of making that hold in a
// layered decoder, where the posterior already contains every c2v message.)
// The block structure follows the paper's row-parallel figure; single-cycle
// layers and the inverse rotation on the c2v return path are this design's.
module pe
  import ldpc_pkg::*;
#(
  parameter int unsigned Z   = ZMAX,
  parameter int unsigned COL = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 load,
  input  msg_t  [Z-1:0]        prior,
  input  logic                 act,
  input  logic [1:0]           layer,
  input  logic                 heat,
  input  logic                 commit,
  input  logic                 flip_now,
  input  logic [QW-2:0]        a0,
  input  logic [QW-2:0]        b0,
  output logic                 valid,
  output logic [SW-1:0]        shift,
  output msg_t  [Z-1:0]        v2c_pp,
  input  c2v_t  [Z-1:0]        c2v_in,
  output logic  [Z-1:0]        hard,
  output logic  [Z-1:0]        rw_en,
  output logic  [Z-1:0]        flip_en
);

  logic [1:0]          addr;
  c2v_t [Z-1:0]        c2v_old;
  msg_t [Z-1:0]        r_old, r_new, q;
  logic [Z-1:0]        sat_rd, sat_new, inc;
  logic [Z-1:0][1:0]   label_cur, label_acc;
  post_t [Z-1:0]       post;
  logic                upd;

  assign upd = act & valid;

  addr_lut #(.Z(Z), .COL(COL)) u_lut (
    .layer(layer), .valid(valid), .shift(shift), .addr(addr)
  );

  c2v_mem #(.Z(Z), .DEPTH(MB)) u_c2v (
    .clk(clk), .rst_n(rst_n), .clear(clear),
    .raddr(addr), .rdata(c2v_old),
    .we(upd), .waddr(addr), .wdata(c2v_in), .zero_lanes(flip_en)
  );

  // Two separate blocks: the read side feeds the check nodes, the write side
  // comes back from them, so one block would look like a combinational loop.
  always_comb begin
    for (int i = 0; i < Z; i++) begin
      r_old[i]  = c2v_old[i].msg;
      sat_rd[i] = c2v_old[i].sat;
    end
  end

  always_comb begin
    for (int i = 0; i < Z; i++) begin
      r_new[i]   = c2v_in[i].msg;
      sat_new[i] = c2v_in[i].sat;
    end
  end

  vn_unit #(.Z(Z)) u_vn (
    .clk(clk), .rst_n(rst_n), .load(load), .prior(prior),
    .r_old(r_old), .q(q), .upd(upd), .r_new(r_new),
    .flip(flip_en), .b0(b0), .post(post), .hard(hard)
  );

  pp_controller #(.Z(Z)) u_ppc (
    .act(upd), .heat(heat), .flip_now(flip_now),
    .sat_rd(sat_rd), .sat_new(sat_new),
    .label_cur(label_cur), .label_acc(label_acc),
    .inc(inc), .rw_en(rw_en), .flip_en(flip_en)
  );

  label_mem #(.Z(Z)) u_label (
    .clk(clk), .rst_n(rst_n), .clear(clear),
    .inc(inc), .commit(commit), .cur(label_cur), .acc(label_acc)
  );

  // A0 reweighting mux.
  always_comb begin
    for (int i = 0; i < Z; i++)
      v2c_pp[i] = rw_en[i] ? (q[i][QW-1] ? -msg_t'(a0) : msg_t'(a0)) : q[i];
  end

endmodule
