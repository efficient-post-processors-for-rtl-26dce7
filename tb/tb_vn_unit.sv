// tb_vn_unit: loads random priors, then applies random old/new c2v messages,
// updates and soft flips; checks the VC messages (Lps - r_old saturated to
// +-15), the posterior (saturated to +-127), the flip rule sgn(Lps)*B0 and
// the hard decisions against a model.
`timescale 1ns/1ps
module tb_vn_unit;
  import ldpc_pkg::*;
  localparam int Z = ZMAX;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, upd = 0;
  msg_t [Z-1:0] prior, r_old, r_new, q;
  logic [Z-1:0] flip = '0, hard;
  logic [QW-2:0] b0 = 4'd1;
  post_t [Z-1:0] post;
  int m [Z];

  vn_unit #(.Z(Z)) dut (.clk(clk), .rst_n(rst_n), .load(load), .prior(prior), .r_old(r_old), .q(q),
    .upd(upd), .r_new(r_new), .flip(flip), .b0(b0), .post(post), .hard(hard));

  always #5 clk = ~clk;

  function automatic int clip(int x, int lim);
    return (x > lim) ? lim : ((x < -lim) ? -lim : x);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n_sat = 0;
    prior = '0; r_old = '0; r_new = '0;
    for (int i = 0; i < Z; i++) m[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      load = (t % 300 == 0);
      upd = 1'($urandom);
      b0 = 4'($urandom_range(0, 7));
      for (int i = 0; i < Z; i++) begin
        prior[i] = msg_t'($urandom_range(0, 30) - 15);
        r_old[i] = msg_t'($urandom_range(0, 30) - 15);
        r_new[i] = msg_t'($urandom_range(0, 30) - 15);
        flip[i]  = ($urandom_range(0, 19) == 0);
      end
      #1;
      for (int i = 0; i < Z; i++) begin
        checks++;
        if (int'(q[i]) != clip(m[i] - int'(r_old[i]), 15) || int'(post[i]) != m[i] || hard[i] != (m[i] < 0)) begin
          failures++; if (failures < 5) $display("t=%0d lane %0d q %0d post %0d model %0d", t, i, q[i], post[i], m[i]);
        end
        if (m[i] == 127 || m[i] == -127) n_sat++;
      end
      @(posedge clk); #1;
      for (int i = 0; i < Z; i++) begin
        if (load) m[i] = int'(prior[i]);
        else if (flip[i]) m[i] = (m[i] < 0) ? -int'(b0) : int'(b0);
        else if (upd) m[i] = clip(m[i] - int'(r_old[i]) + int'(r_new[i]), 127);
      end
    end
    checks++; if (n_sat == 0) begin failures++; $display("posterior never saturated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
