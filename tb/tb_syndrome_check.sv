// tb_syndrome_check: random hard-decision vectors at Z = 81 (dense and with
// a few ones) and the all-zero codeword; the number of failed checks is
// computed here edge by edge from the base matrix and compared.
`timescale 1ns/1ps
module tb_syndrome_check;
  import ldpc_pkg::*;
  localparam int Z = ZMAX;
  int checks = 0, failures = 0;
  logic [NB-1:0][Z-1:0] hard;
  logic ok;
  logic [15:0] n_unsat;

  syndrome_check #(.Z(Z)) dut (.hard(hard), .ok(ok), .n_unsat(n_unsat));

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 60; t++) begin
      int e;
      e = 0;
      hard = '0;
      if (t % 3 == 1) for (int c = 0; c < NB; c++) for (int i = 0; i < Z; i++) hard[c][i] = 1'($urandom);
      if (t % 3 == 2) for (int k = 0; k < t % 7; k++) hard[$urandom_range(0, NB - 1)][$urandom_range(0, Z - 1)] = 1'b1;
      #1;
      for (int l = 0; l < MB; l++) for (int r = 0; r < Z; r++) begin
        bit p;
        p = 0;
        for (int c = 0; c < NB; c++) if (HB[l][c] != -1) p ^= hard[c][(r + HB[l][c]) % Z];
        e += p;
      end
      checks++;
      if (int'(n_unsat) != e || ok != (e == 0)) begin failures++; $display("t %0d: %0d vs %0d", t, n_unsat, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
