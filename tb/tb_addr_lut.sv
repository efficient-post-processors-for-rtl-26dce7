// tb_addr_lut: checks the per-column address lookup tables against values
// worked out by hand from the base matrix (block columns 0, 12 and 23) and,
// for every column, against a count of non-zero blocks done here.
`timescale 1ns/1ps
module tb_addr_lut;
  import ldpc_pkg::*;

  int checks = 0, failures = 0;
  logic [1:0] layer;
  logic [NB-1:0] valid;
  logic [NB-1:0][SW-1:0] shift;
  logic [NB-1:0][1:0] addr;

  for (genvar c = 0; c < NB; c++) begin : g
    addr_lut #(.Z(ZMAX), .COL(c)) dut (.layer(layer), .valid(valid[c]), .shift(shift[c]), .addr(addr[c]));
  end

  // Small-Z instance: shifts are taken mod Z.
  logic v9; logic [SW-1:0] s9; logic [1:0] a9;
  addr_lut #(.Z(9), .COL(0)) dut9 (.layer(layer), .valid(v9), .shift(s9), .addr(a9));

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    #1000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Hand-worked entries: {valid, shift, addr} per layer.
  int col0  [4][3] = '{'{1, 13, 0}, '{1, 69, 1}, '{1, 51, 2}, '{1, 16, 3}};
  int col12 [4][3] = '{'{0,  0, 0}, '{1, 64, 0}, '{1, 67, 1}, '{1,  4, 2}};
  int col23 [4][3] = '{'{0,  0, 0}, '{0,  0, 0}, '{1,  0, 0}, '{1,  0, 1}};
  int s0_mod9 [4] = '{13 % 9, 69 % 9, 51 % 9, 16 % 9};

  initial begin
    for (int l = 0; l < MB; l++) begin
      layer = 2'(l); #1;
      expect_eq(valid[0], col0[l][0], "c0 valid"); expect_eq(shift[0], col0[l][1], "c0 shift"); expect_eq(addr[0], col0[l][2], "c0 addr");
      expect_eq(valid[12], col12[l][0], "c12 valid");
      if (col12[l][0] != 0) begin expect_eq(shift[12], col12[l][1], "c12 shift"); expect_eq(addr[12], col12[l][2], "c12 addr"); end
      expect_eq(valid[23], col23[l][0], "c23 valid");
      if (col23[l][0] != 0) begin expect_eq(shift[23], col23[l][1], "c23 shift"); expect_eq(addr[23], col23[l][2], "c23 addr"); end
      expect_eq(v9, 1, "z9 valid"); expect_eq(s9, s0_mod9[l], "z9 shift");
      for (int c = 0; c < NB; c++) begin
        int a;
        a = 0;
        for (int r = 0; r < l; r++) if (HB[r][c] != -1) a++;
        expect_eq(valid[c], HB[l][c] != -1, "valid");
        if (HB[l][c] != -1) begin
          expect_eq(shift[c], HB[l][c], "shift");
          expect_eq(addr[c], a, "addr");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
