// tb_barrel_shifter: random vectors and shifts through a forward and an
// inverse rotator at Z = 81; checks each element against the index formula
// and that the inverse undoes the forward rotation.
`timescale 1ns/1ps
module tb_barrel_shifter;
  import ldpc_pkg::*;
  localparam int Z = ZMAX;
  localparam int W = 6;
  int checks = 0, failures = 0;
  logic [Z-1:0][W-1:0] din, fwd, back;
  logic [SW-1:0] shift;

  barrel_shifter #(.Z(Z), .W(W), .INVERSE(1'b0)) dut_f (.din(din), .shift(shift), .dout(fwd));
  barrel_shifter #(.Z(Z), .W(W), .INVERSE(1'b1)) dut_i (.din(fwd), .shift(shift), .dout(back));

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < Z; i++) din[i] = W'($urandom);
      shift = (t < Z) ? SW'(t) : SW'($urandom_range(0, Z - 1));
      #1;
      for (int r = 0; r < Z; r++) begin
        checks++;
        if (fwd[r] != din[(r + int'(shift)) % Z]) begin
          failures++; if (failures < 10) $display("fwd shift %0d row %0d", shift, r);
        end
      end
      checks++;
      if (back != din) begin failures++; if (failures < 10) $display("inverse mismatch shift %0d", shift); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
