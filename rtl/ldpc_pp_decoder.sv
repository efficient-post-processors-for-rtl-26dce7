// ldpc_pp_decoder: row-parallel layered min-sum decoder for the IEEE 802.11n
// (1944,1620) LDPC code with an error-floor post-processor.
//
// Structure: NB = 24 processing elements, one per block column, each with Z
// variable-node lanes; per PE a forward barrel shifter (VC messages to check
// order) and an inverse one (c2v messages back); Z check nodes that each see
// one message from every participating PE; a syndrome checker; and the
// iteration sequencer. One layer (block row, Z checks) is processed per clock
// cycle, so an iteration takes MB = 4 layer cycles plus one check cycle.
//
// Post-processing (entered when checks still fail after M iterations):
// focused heating soft-flips variable nodes that see two or more unsatisfied
// checks to a weak opposite-sign LLR B0 for L iterations; after G plain
// iterations, extended heating reduces, for P iterations, every VC message
// from a neighborhood variable node (one that saw an unsatisfied check last
// iteration) to a satisfied check down to magnitude A0; N plain iterations
// then cool the decoder down. The schedule is the run-time 'cfg' input
// (ldpc_pkg::CFG_80211N holds the paper's values for this code).
//
// Interface: before 'start', load the channel LLRs (Q5.0, positive = bit 0)
// one block column per cycle with llr_we, llr_col and llr_in (lane i = variable
// node llr_col*Z+i). Pulse 'start' while not busy; 'done' pulses when the frame
// is finished, with 'ok' (all checks satisfied), 'iters' and 'pp_used' valid
// until the next start. 'hard' is the decision on every variable node,
// 'n_unsat' the number of parity checks it fails, 'phase' the current phase.
// Latency: 'busy' lasts 5 cycles per iteration; 'done' follows it.
module ldpc_pp_decoder
  import ldpc_pkg::*;
#(
  parameter int unsigned Z      = ZMAX,
  parameter int unsigned OFFSET = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 llr_we,
  input  logic [4:0]           llr_col,
  input  msg_t  [Z-1:0]        llr_in,
  input  logic                 start,
  input  pp_cfg_t              cfg,
  output logic                 busy,
  output logic                 done,
  output logic                 ok,
  output logic [9:0]           iters,
  output logic                 pp_used,
  output phase_e               phase,
  output logic [15:0]          n_unsat,
  output logic [NB-1:0][Z-1:0] hard
);

  logic               clear, act, commit, flip_now, syn_ok, heat;
  logic [1:0]         layer;

  logic [NB-1:0]                 valid;
  logic [NB-1:0][SW-1:0]         shift;
  msg_t [NB-1:0][Z-1:0]          v2c_pp;
  logic [NB-1:0][Z-1:0][QW-1:0]  v2c_rot;
  c2v_t [NB-1:0][Z-1:0]          c2v_lane;
  c2v_t [Z-1:0][NB-1:0]          cn_out;
  msg_t [Z-1:0][NB-1:0]          cn_in;
  logic [NB-1:0][Z-1:0]          rw_en, flip_en;

  assign heat = (phase == PH_HEAT);

  decoder_ctrl u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .syn_ok(syn_ok),
    .clear(clear), .act(act), .layer(layer), .commit(commit), .flip_now(flip_now),
    .phase(phase), .busy(busy), .done(done), .ok(ok), .iters(iters), .pp_used(pp_used)
  );

  for (genvar c = 0; c < NB; c++) begin : g_pe
    logic [Z-1:0][QW+0:0] back_in, back_out;

    pe #(.Z(Z), .COL(c)) u_pe (
      .clk(clk), .rst_n(rst_n), .clear(clear),
      .load(llr_we && !busy && (32'(llr_col) == c)), .prior(llr_in),
      .act(act), .layer(layer), .heat(heat), .commit(commit), .flip_now(flip_now),
      .a0(cfg.a0), .b0(cfg.b0),
      .valid(valid[c]), .shift(shift[c]), .v2c_pp(v2c_pp[c]),
      .c2v_in(c2v_lane[c]), .hard(hard[c]), .rw_en(rw_en[c]), .flip_en(flip_en[c])
    );

    barrel_shifter #(.Z(Z), .W(QW), .INVERSE(1'b0)) u_fwd (
      .din(v2c_pp[c]), .shift(shift[c]), .dout(v2c_rot[c])
    );

    for (genvar k = 0; k < Z; k++) begin : g_k
      assign cn_in[k][c]  = msg_t'(v2c_rot[c][k]);
      assign back_in[k]   = cn_out[k][c];
      assign c2v_lane[c][k] = c2v_t'(back_out[k]);
    end

    barrel_shifter #(.Z(Z), .W(QW + 1), .INVERSE(1'b1)) u_inv (
      .din(back_in), .shift(shift[c]), .dout(back_out)
    );
  end

  for (genvar k = 0; k < Z; k++) begin : g_cn
    check_node #(.DC(NB), .OFFSET(OFFSET)) u_cn (
      .q(cn_in[k]), .en(valid), .r(cn_out[k])
    );
  end

  syndrome_check #(.Z(Z)) u_syn (
    .hard(hard), .ok(syn_ok), .n_unsat(n_unsat)
  );

endmodule
