// tb_label_mem: random per-lane increments, commits and clears against a
// model of the double-buffered 2-bit saturating counters.
`timescale 1ns/1ps
module tb_label_mem;
  import ldpc_pkg::*;
  localparam int Z = ZMAX;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, commit = 0;
  logic [Z-1:0] inc = '0;
  logic [Z-1:0][1:0] cur, acc;
  int mcur [Z], macc [Z];

  label_mem #(.Z(Z)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .inc(inc), .commit(commit), .cur(cur), .acc(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n_sat3 = 0;
    for (int i = 0; i < Z; i++) begin mcur[i] = 0; macc[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int i = 0; i < Z; i++) begin
        checks++;
        if (int'(cur[i]) != mcur[i] || int'(acc[i]) != macc[i]) begin
          failures++; if (failures < 5) $display("t=%0d lane %0d cur %0d/%0d acc %0d/%0d", t, i, cur[i], mcur[i], acc[i], macc[i]);
        end
        if (macc[i] == 3) n_sat3++;
      end
      clear = ($urandom_range(0, 199) == 0);
      commit = ($urandom_range(0, 4) == 0);
      for (int i = 0; i < Z; i++) inc[i] = ($urandom_range(0, 2) == 0);
      @(posedge clk); #1;
      if (clear) for (int i = 0; i < Z; i++) begin mcur[i] = 0; macc[i] = 0; end
      else if (commit) for (int i = 0; i < Z; i++) begin mcur[i] = macc[i]; macc[i] = 0; end
      else for (int i = 0; i < Z; i++) if (inc[i] && macc[i] < 3) macc[i]++;
    end
    checks++; if (n_sat3 == 0) begin failures++; $display("saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
