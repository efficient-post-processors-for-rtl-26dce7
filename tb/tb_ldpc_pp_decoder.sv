// tb_ldpc_pp_decoder: end-to-end test of the post-processing LDPC decoder at
// its default size (the full (1944,1620) code, Z = 81).
//
// Frames are the all-zero codeword sent over a noisy channel: each channel LLR
// is mean + sigma * (approximately Gaussian noise from a sum of 12 uniforms),
// rounded and clipped to Q5.0. Every frame is also decoded by a reference model
// written here edge by edge (check outputs computed as a direct minimum over
// the other inputs, no min1/min2 tracking, messages indexed by check row), and
// the decoder's hard decisions, iteration count, 'ok' and 'pp_used' must match
// it exactly. The decoder must be busy for exactly 5 cycles per iteration.
//
// Frames use several schedules: the paper's (M=20, L=5, G=10, P=10, N=20,
// A0=1, B0=1), short ones with M=1..3 so that post-processing starts often,
// quenching (P=1, L=G=0) and extended heating alone (L=0). The test counts how
// often each mechanism happened (early stop in BP, entering post-processing,
// soft bit flips, VC reweighting, gap and cooling phases, quenching frames,
// frames resolved only by post-processing, frames that fail) and counts a
// failure for any that never did.
`timescale 1ns/1ps
module tb_ldpc_pp_decoder;
  import ldpc_pkg::*;

  localparam int Z = ZMAX;
  localparam int N = NB * Z;
  localparam int OFF = 1;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic llr_we = 1'b0;
  logic [4:0] llr_col = '0;
  msg_t [Z-1:0] llr_in = '0;
  logic start = 1'b0;
  pp_cfg_t cfg = CFG_80211N;
  logic busy, done, ok, pp_used;
  logic [9:0] iters;
  phase_e phase;
  logic [15:0] n_unsat;
  logic [NB-1:0][Z-1:0] hard;

  ldpc_pp_decoder dut (
    .clk(clk), .rst_n(rst_n), .llr_we(llr_we), .llr_col(llr_col), .llr_in(llr_in),
    .start(start), .cfg(cfg), .busy(busy), .done(done), .ok(ok), .iters(iters),
    .pp_used(pp_used), .phase(phase), .n_unsat(n_unsat), .hard(hard)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int busy_cycles = 0;
  always @(posedge clk) if (busy) busy_cycles <= busy_cycles + 1;

  // Watchdog.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters.
  int n_early = 0, n_pp = 0, n_flip = 0, n_rw = 0, n_gap = 0, n_cool = 0;
  int n_quench = 0, n_pp_fixed = 0, n_fail = 0;
  always @(posedge clk) begin
    if (busy && dut.flip_now && (dut.flip_en != '0)) n_flip++;
    if (busy && dut.act && (dut.rw_en != '0)) n_rw++;
    if (busy && dut.act && phase == PH_GAP) n_gap++;
    if (busy && dut.act && phase == PH_COOL) n_cool++;
  end

  // ---------------- reference model ----------------
  int prior [N];
  int lps [N];
  int rmsg [MB][NB][Z];
  bit rsat [MB][NB][Z];
  int cnt_cur [N], cnt_acc [N];
  bit ref_hard [N];
  int ref_iters;
  bit ref_ok, ref_pp;

  function automatic int clip(int x, int lim);
    return (x > lim) ? lim : ((x < -lim) ? -lim : x);
  endfunction

  function automatic phase_e ph_of(int i, pp_cfg_t c);
    if (i < int'(c.m)) return PH_BP;
    if (i < int'(c.m) + int'(c.l)) return PH_CONSTRAIN;
    if (i < int'(c.m) + int'(c.l) + int'(c.g)) return PH_GAP;
    if (i < int'(c.m) + int'(c.l) + int'(c.g) + int'(c.p)) return PH_HEAT;
    return PH_COOL;
  endfunction

  task automatic ref_decode(pp_cfg_t c);
    int total = int'(c.m) + int'(c.l) + int'(c.g) + int'(c.p) + int'(c.n);
    int vi [NB];
    int qf [NB];
    int qi [NB];
    bit en [NB];
    phase_e ph;
    for (int v = 0; v < N; v++) begin
      lps[v] = prior[v]; cnt_cur[v] = 0; cnt_acc[v] = 0;
    end
    for (int l = 0; l < MB; l++) for (int cc = 0; cc < NB; cc++) for (int k = 0; k < Z; k++) begin
      rmsg[l][cc][k] = 0; rsat[l][cc][k] = 1'b1;
    end
    ref_pp = 0;
    for (int it = 0; it < total; it++) begin
      ph = ph_of(it, c);
      if (ph != PH_BP) ref_pp = 1;
      for (int l = 0; l < MB; l++) begin
        for (int k = 0; k < Z; k++) begin
          for (int cc = 0; cc < NB; cc++) begin
            en[cc] = (HB[l][cc] >= 0);
            if (en[cc]) begin
              vi[cc] = cc * Z + (k + (HB[l][cc] % Z)) % Z;
              qf[cc] = lps[vi[cc]] - rmsg[l][cc][k];
              qi[cc] = clip(qf[cc], MSG_MAX);
              if (ph == PH_HEAT && cnt_cur[vi[cc]] != 0 && rsat[l][cc][k])
                qi[cc] = (qi[cc] < 0) ? -int'(c.a0) : int'(c.a0);
            end
          end
          for (int cc = 0; cc < NB; cc++) begin
            if (en[cc]) begin
              int mn = MSG_MAX;
              bit s = 0, sall = 0;
              for (int j = 0; j < NB; j++) if (en[j]) begin
                sall ^= (qi[j] < 0);
                if (j != cc) begin
                  s ^= (qi[j] < 0);
                  if ((qi[j] < 0 ? -qi[j] : qi[j]) < mn) mn = (qi[j] < 0 ? -qi[j] : qi[j]);
                end
              end
              mn = (mn > OFF) ? mn - OFF : 0;
              rmsg[l][cc][k] = s ? -mn : mn;
              rsat[l][cc][k] = !sall;
            end
          end
          for (int cc = 0; cc < NB; cc++) if (en[cc]) begin
            lps[vi[cc]] = clip(qf[cc] + rmsg[l][cc][k], POST_MAX);
            if (!rsat[l][cc][k] && cnt_acc[vi[cc]] < 3) cnt_acc[vi[cc]]++;
          end
        end
      end
      // syndrome
      begin
        bit good = 1;
        for (int l = 0; l < MB; l++) for (int k = 0; k < Z; k++) begin
          bit p = 0;
          for (int cc = 0; cc < NB; cc++) if (HB[l][cc] >= 0)
            p ^= (lps[cc * Z + (k + (HB[l][cc] % Z)) % Z] < 0);
          if (p) good = 0;
        end
        ref_iters = it + 1;
        ref_ok = good;
        if (good) break;
      end
      if (it + 1 < total && ph_of(it + 1, c) == PH_CONSTRAIN)
        for (int v = 0; v < N; v++)
          if (cnt_acc[v] >= 2) begin
            lps[v] = (lps[v] < 0) ? -int'(c.b0) : int'(c.b0);
            for (int l = 0; l < MB; l++) if (HB[l][v / Z] >= 0)
              rmsg[l][v / Z][(v % Z - HB[l][v / Z] % Z + Z) % Z] = 0;
          end
      for (int v = 0; v < N; v++) begin cnt_cur[v] = cnt_acc[v]; cnt_acc[v] = 0; end
    end
    for (int v = 0; v < N; v++) ref_hard[v] = (lps[v] < 0);
  endtask

  // ---------------- stimulus ----------------
  function automatic int gauss_x100();
    int s = 0;
    for (int i = 0; i < 12; i++) s += int'($urandom_range(0, 1000));
    return s - 6000;  // ~ N(0, 1) scaled by 1000
  endfunction

  task automatic run_frame(pp_cfg_t c, int mean, int sigma_x10);
    int mism;
    for (int v = 0; v < N; v++)
      prior[v] = clip((mean * 1000 + (sigma_x10 * gauss_x100()) / 10) / 1000, MSG_MAX);
    ref_decode(c);
    for (int cc = 0; cc < NB; cc++) begin
      @(negedge clk);
      llr_we = 1'b1; llr_col = 5'(cc);
      for (int k = 0; k < Z; k++) llr_in[k] = msg_t'(prior[cc * Z + k]);
    end
    @(negedge clk);
    llr_we = 1'b0; cfg = c; start = 1'b1; busy_cycles = 0;
    @(negedge clk); start = 1'b0;
    while (!done) @(posedge clk);
    #1;
    mism = 0;
    for (int v = 0; v < N; v++) if (hard[v / Z][v % Z] != ref_hard[v]) mism++;
    checks++; if (mism != 0) begin failures++; $display("frame: %0d bits differ from reference", mism); end
    checks++; if (int'(iters) != ref_iters) begin failures++; $display("iters %0d ref %0d", iters, ref_iters); end
    checks++; if (ok != ref_ok) begin failures++; $display("ok %0d ref %0d", ok, ref_ok); end
    checks++; if (ok != (n_unsat == 0)) begin failures++; $display("n_unsat %0d with ok %0d", n_unsat, ok); end
    checks++; if (pp_used != ref_pp) begin failures++; $display("pp_used %0d ref %0d", pp_used, ref_pp); end
    checks++; if (busy_cycles != 5 * int'(iters)) begin
      failures++; $display("busy for %0d cycles in %0d iterations", busy_cycles, iters);
    end
    if (ok && !pp_used) n_early++;
    if (pp_used) n_pp++;
    if (ok && pp_used) n_pp_fixed++;
    if (!ok) n_fail++;
    if (c.p == 7'd1 && c.l == 7'd0) n_quench++;
    $display("frame cfg M=%0d L=%0d G=%0d P=%0d N=%0d: iters=%0d ok=%0d pp=%0d errors=%0d",
             c.m, c.l, c.g, c.p, c.n, iters, ok, pp_used, count_err());
  endtask

  function automatic int count_err();
    int e = 0;
    for (int v = 0; v < N; v++) e += int'(hard[v / Z][v % Z]);
    return e;
  endfunction

  pp_cfg_t c_short, c_quench, c_ext;

  initial begin
    c_short  = '{m: 7'd2, l: 7'd3, g: 7'd2, p: 7'd4, n: 7'd6, a0: 4'd1, b0: 4'd1};
    c_quench = '{m: 7'd2, l: 7'd0, g: 7'd0, p: 7'd1, n: 7'd6, a0: 4'd1, b0: 4'd1};
    c_ext    = '{m: 7'd3, l: 7'd0, g: 7'd0, p: 7'd5, n: 7'd6, a0: 4'd1, b0: 4'd3};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    // The paper's schedule: clean and noisy frames.
    run_frame(CFG_80211N, 7, 25);
    run_frame(CFG_80211N, 6, 30);
    run_frame(CFG_80211N, 3, 45);
    // Short schedules so post-processing and its phases occur.
    for (int f = 0; f < 4; f++) run_frame(c_short, 6, 24 + 2 * f);
    for (int f = 0; f < 2; f++) run_frame(c_quench, 6, 26);
    for (int f = 0; f < 2; f++) run_frame(c_ext, 6, 26);
    $display("mechanisms: early=%0d pp=%0d flip=%0d reweight=%0d gap=%0d cool=%0d quench=%0d pp_fixed=%0d fail=%0d",
             n_early, n_pp, n_flip, n_rw, n_gap, n_cool, n_quench, n_pp_fixed, n_fail);
    checks++; if (n_early == 0)    begin failures++; $display("no frame converged in BP"); end
    checks++; if (n_pp == 0)       begin failures++; $display("post-processing never entered"); end
    checks++; if (n_flip == 0)     begin failures++; $display("no soft bit flip"); end
    checks++; if (n_rw == 0)       begin failures++; $display("no VC reweighting"); end
    checks++; if (n_gap == 0)      begin failures++; $display("no gap iteration"); end
    checks++; if (n_cool == 0)     begin failures++; $display("no cooling iteration"); end
    checks++; if (n_quench == 0)   begin failures++; $display("no quenching frame"); end
    checks++; if (n_pp_fixed == 0) begin failures++; $display("no frame resolved by post-processing"); end
    checks++; if (n_fail == 0)     begin failures++; $display("no frame failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
