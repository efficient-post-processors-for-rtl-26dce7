// tb_pe: one processing element (block column 12, which has no block in layer
// 0) driven like the decoder drives it, with random c2v answers and sat flags
// standing in for the check nodes. A model of the element (posteriors, c2v
// words per layer, label counts) predicts every VC output v2c_pp, including
// the A0 reweighting during heating, the hard decisions after updates, soft
// flips with their c2v clearing, and the valid/shift outputs per layer.
`timescale 1ns/1ps
module tb_pe;
  import ldpc_pkg::*;
  localparam int Z = ZMAX;
  localparam int COL = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, load = 0, act = 0, heat = 0, commit = 0, flip_now = 0;
  logic [1:0] layer = '0;
  logic [QW-2:0] a0 = 4'd1, b0 = 4'd1;
  msg_t [Z-1:0] prior = '0, v2c_pp;
  c2v_t [Z-1:0] c2v_in = '0;
  logic valid;
  logic [SW-1:0] shift;
  logic [Z-1:0] hard, rw_en, flip_en;

  pe #(.Z(Z), .COL(COL)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .load(load), .prior(prior),
    .act(act), .layer(layer), .heat(heat), .commit(commit), .flip_now(flip_now), .a0(a0), .b0(b0),
    .valid(valid), .shift(shift), .v2c_pp(v2c_pp), .c2v_in(c2v_in), .hard(hard), .rw_en(rw_en), .flip_en(flip_en));

  always #5 clk = ~clk;

  int lps [Z];
  int rm [MB][Z];
  bit rs [MB][Z];
  int cur [Z], acc [Z];
  int n_rw = 0, n_flip = 0;

  function automatic int clip(int x, int lim);
    return (x > lim) ? lim : ((x < -lim) ? -lim : x);
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp_shift [MB] = '{0, 64, 67, 4};   // column 12 of the base matrix
    bit exp_valid [MB] = '{0, 1, 1, 1};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 4; frame++) begin
      // load priors and clear
      @(negedge clk);
      load = 1;
      for (int i = 0; i < Z; i++) begin prior[i] = msg_t'($urandom_range(0, 30) - 15); lps[i] = int'(prior[i]); end
      @(negedge clk);
      load = 0; clear = 1;
      for (int l = 0; l < MB; l++) for (int i = 0; i < Z; i++) begin rm[l][i] = 0; rs[l][i] = 1; end
      for (int i = 0; i < Z; i++) begin cur[i] = 0; acc[i] = 0; end
      @(negedge clk);
      clear = 0;
      for (int it = 0; it < 8; it++) begin
        heat = (it >= 4);
        a0 = 4'($urandom_range(0, 3));
        b0 = 4'($urandom_range(1, 3));
        for (int l = 0; l < MB; l++) begin
          act = 1; layer = 2'(l);
          for (int i = 0; i < Z; i++) begin
            c2v_in[i].msg = msg_t'($urandom_range(0, 30) - 15);
            c2v_in[i].sat = ($urandom_range(0, 3) != 0);
          end
          #1;
          checks++;
          if (valid != exp_valid[l] || (valid && int'(shift) != exp_shift[l])) begin
            failures++; $display("layer %0d valid %0d shift %0d", l, valid, shift);
          end
          if (exp_valid[l]) begin
            int a;
            a = l - 1;  // compacted address: column 12 has no block in layer 0
            for (int i = 0; i < Z; i++) begin
              int qf, qs, e;
              bit rw;
              qf = lps[i] - rm[a][i];
              qs = clip(qf, 15);
              rw = heat && cur[i] != 0 && rs[a][i];
              e = rw ? ((qs < 0) ? -int'(a0) : int'(a0)) : qs;
              n_rw += rw;
              checks++;
              if (int'(v2c_pp[i]) != e) begin
                failures++; if (failures < 10) $display("it %0d layer %0d lane %0d: v2c %0d expected %0d", it, l, i, v2c_pp[i], e);
              end
            end
            @(posedge clk); #1;
            for (int i = 0; i < Z; i++) begin
              lps[i] = clip(lps[i] - rm[a][i] + int'(c2v_in[i].msg), 127);
              rm[a][i] = int'(c2v_in[i].msg);
              rs[a][i] = c2v_in[i].sat;
              if (!c2v_in[i].sat && acc[i] < 3) acc[i]++;
            end
          end else begin
            @(posedge clk); #1;
          end
          @(negedge clk);
        end
        // check cycle
        act = 0; commit = 1; flip_now = (it == 1 || it == 2);
        #1;
        for (int i = 0; i < Z; i++) begin
          checks++;
          if (hard[i] != (lps[i] < 0)) begin failures++; if (failures < 10) $display("hard lane %0d", i); end
        end
        @(posedge clk); #1;
        for (int i = 0; i < Z; i++) begin
          if (flip_now && acc[i] >= 2) begin
            lps[i] = (lps[i] < 0) ? -int'(b0) : int'(b0);
            for (int l = 0; l < MB; l++) rm[l][i] = 0;
            n_flip++;
          end
          cur[i] = acc[i]; acc[i] = 0;
        end
        @(negedge clk);
        commit = 0; flip_now = 0;
      end
    end
    checks++; if (n_rw == 0 || n_flip == 0) begin failures++; $display("reweight %0d flip %0d", n_rw, n_flip); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
