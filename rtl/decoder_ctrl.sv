// decoder_ctrl: iteration and post-processing sequencer.
//
// Runs the two-phase procedure: M iterations of plain BP; if checks still
// fail, post-processing as focused heating followed by extended heating:
// L constraining iterations (plural bits are soft-flipped before each), G gap
// iterations of plain BP, P heating iterations (VC reweighting to A0) and
// N cooling iterations of plain BP. Decoding stops as soon as all checks are
// satisfied, or after M+L+G+P+N iterations. Quenching is P=1, L=G=0.
// The paper gives the phases and their lengths; their exact order (focused
// before extended heating, the gap as plain BP) is this design's reading.
//
// Timing: 'start' (in IDLE) clears the frame state ('clear' pulse). Each
// iteration is MB layer cycles ('act' high, 'layer' 0..MB-1) followed by one
// check cycle ('commit' high) in which the syndrome of the finished iteration
// is read, labels are committed and, if the next iteration constrains,
// 'flip_now' triggers the soft bit flips. 'busy' is high from the clock edge
// that samples 'start' to the edge that ends the final check cycle, that is
// for k*(MB+1) cycles in a frame of k iterations; 'done' is high for the one
// cycle after that. 'ok', 'iters' and 'pp_used' hold until the next start.
module decoder_ctrl
  import ldpc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  pp_cfg_t     cfg,
  input  logic        syn_ok,
  output logic        clear,
  output logic        act,
  output logic [1:0]  layer,
  output logic        commit,
  output logic        flip_now,
  output phase_e      phase,
  output logic        busy,
  output logic        done,
  output logic        ok,
  output logic [9:0]  iters,
  output logic        pp_used
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_CHECK} state_e;

  state_e   state;
  pp_cfg_t  cfg_q;
  logic [9:0] it;

  function automatic phase_e phase_of(logic [9:0] i, pp_cfg_t c);
    logic [9:0] b1, b2, b3, b4;
    b1 = 10'(c.m);
    b2 = b1 + 10'(c.l);
    b3 = b2 + 10'(c.g);
    b4 = b3 + 10'(c.p);
    if (i < b1) return PH_BP;
    if (i < b2) return PH_CONSTRAIN;
    if (i < b3) return PH_GAP;
    if (i < b4) return PH_HEAT;
    return PH_COOL;
  endfunction

  logic [9:0] total;
  logic [9:0] it_next;
  assign total   = 10'(cfg_q.m) + 10'(cfg_q.l) + 10'(cfg_q.g) + 10'(cfg_q.p) + 10'(cfg_q.n);
  assign it_next = it + 10'd1;

  assign clear    = (state == S_IDLE) && start;
  assign act      = (state == S_RUN);
  assign commit   = (state == S_CHECK);
  assign phase    = phase_of(it, cfg_q);
  assign busy     = (state != S_IDLE);
  assign flip_now = (state == S_CHECK) && !syn_ok && (it_next < total) &&
                    (phase_of(it_next, cfg_q) == PH_CONSTRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cfg_q   <= '0;
      it      <= '0;
      layer   <= '0;
      done    <= 1'b0;
      ok      <= 1'b0;
      iters   <= '0;
      pp_used <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          cfg_q   <= cfg;
          it      <= '0;
          layer   <= '0;
          ok      <= 1'b0;
          iters   <= '0;
          pp_used <= 1'b0;
        end
        S_RUN: begin
          layer <= layer + 2'd1;
          if (32'(layer) == MB - 1) state <= S_CHECK;
        end
        S_CHECK: begin
          layer <= '0;
          iters <= it_next;
          if (syn_ok || it_next >= total) begin
            state <= S_IDLE;
            done  <= 1'b1;
            ok    <= syn_ok;
          end else begin
            state <= S_RUN;
            it    <= it_next;
            if (phase_of(it_next, cfg_q) != PH_BP) pp_used <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A frame needs at least one iteration. Reset is kept out of the property
  // so that rst_n stays a pure asynchronous reset.
  a_cfg_total: assert property (@(posedge clk)
                                (state == S_IDLE && start) |-> (cfg.m != '0));

endmodule
