// tb_decoder_ctrl: runs the sequencer through frames with a c_small schedule
// (M=2, L=2, G=1, P=2, N=2) and with the paper's schedule, with the syndrome
// reported as satisfied after a chosen iteration (or never). Every cycle is
// checked against the expected sequence: 4 layer cycles with layers 0..3, one
// check cycle, the phase of each iteration, flip_now only in the check cycle
// before a constraining iteration, then done, ok, iters and pp_used.
`timescale 1ns/1ps
module tb_decoder_ctrl;
  import ldpc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, syn_ok;
  pp_cfg_t cfg;
  logic clear, act, commit, flip_now, busy, done, ok, pp_used;
  logic [1:0] layer;
  phase_e phase;
  logic [9:0] iters;
  int stop_at;  // iteration count after which the syndrome is satisfied (0 = never)
  int it_seen;

  decoder_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .syn_ok(syn_ok), .clear(clear),
    .act(act), .layer(layer), .commit(commit), .flip_now(flip_now), .phase(phase), .busy(busy),
    .done(done), .ok(ok), .iters(iters), .pp_used(pp_used));

  always #5 clk = ~clk;
  int n_commit;
  always @(posedge clk) if (clear) n_commit <= 0; else if (commit) n_commit <= n_commit + 1;
  assign syn_ok = commit && (stop_at != 0) && (n_commit + 1 >= stop_at);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic phase_e exp_phase(int i, pp_cfg_t c);
    if (i < c.m) return PH_BP;
    if (i < c.m + c.l) return PH_CONSTRAIN;
    if (i < c.m + c.l + c.g) return PH_GAP;
    if (i < c.m + c.l + c.g + c.p) return PH_HEAT;
    return PH_COOL;
  endfunction

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s (it %0d)", what, it_seen); end
  endtask

  task automatic run(pp_cfg_t c, int stop);
    int total, exp_it, lay, cyc;
    bit exp_ok;
    total = c.m + c.l + c.g + c.p + c.n;
    exp_it = (stop != 0 && stop <= total) ? stop : total;
    exp_ok = (stop != 0 && stop <= total);
    stop_at = stop; it_seen = 0; lay = 0; cyc = 0;
    @(negedge clk); cfg = c; start = 1;
    #1; chk(clear == 1'b1, "clear with start");
    @(negedge clk); start = 0;
    while (busy) begin
      cyc++;
      if (act) begin
        chk(!commit && 32'(layer) == lay, "layer order");
        chk(phase == exp_phase(it_seen, c), "phase");
        lay++;
      end else begin
        chk(commit && lay == MB, "check cycle after 4 layers");
        chk(flip_now == (!syn_ok && it_seen + 1 < total && exp_phase(it_seen + 1, c) == PH_CONSTRAIN), "flip_now");
        lay = 0;
        it_seen++;
      end
      @(negedge clk);
    end
    chk(done == 1'b1, "done after busy");
    chk(int'(iters) == exp_it && ok == exp_ok, "iters/ok");
    chk(pp_used == (exp_it > c.m), "pp_used");
    chk(cyc == exp_it * (MB + 1), "busy cycles");
    @(negedge clk);
    chk(done == 1'b0, "done is a pulse");
  endtask

  initial begin
    pp_cfg_t c_small;
    c_small = '{m: 7'd2, l: 7'd2, g: 7'd1, p: 7'd2, n: 7'd2, a0: 4'd1, b0: 4'd1};
    cfg = c_small;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(c_small, 0);
    run(c_small, 3);
    run(c_small, 1);
    run(c_small, 6);
    run(CFG_80211N, 0);
    run(CFG_80211N, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
