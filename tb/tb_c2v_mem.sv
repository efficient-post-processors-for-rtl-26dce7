// tb_c2v_mem: random writes, reads, lane clears and frame clears against a
// model array; checks the reset/clear value (message 0, sat 1), read-before-
// write behaviour and that a lane clear keeps the sat flags.
`timescale 1ns/1ps
module tb_c2v_mem;
  import ldpc_pkg::*;
  localparam int Z = ZMAX;
  localparam int D = MB;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, we = 0;
  logic [1:0] raddr = '0, waddr = '0;
  c2v_t [Z-1:0] rdata, wdata;
  logic [Z-1:0] zero_lanes = '0;
  c2v_t [Z-1:0] model [D];

  c2v_mem #(.Z(Z), .DEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .raddr(raddr), .rdata(rdata),
    .we(we), .waddr(waddr), .wdata(wdata), .zero_lanes(zero_lanes));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic clear_model();
    for (int d = 0; d < D; d++) for (int i = 0; i < Z; i++) begin model[d][i].sat = 1'b1; model[d][i].msg = '0; end
  endtask

  initial begin
    int n_zero = 0;
    wdata = '0;
    clear_model();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      // check the read port first (combinational)
      raddr = 2'($urandom);
      #1;
      checks++;
      if (rdata != model[raddr]) begin failures++; if (failures < 5) $display("read mismatch t=%0d addr=%0d", t, raddr); end
      clear = ($urandom_range(0, 99) == 0);
      zero_lanes = '0;
      if ($urandom_range(0, 9) == 0) begin
        for (int i = 0; i < Z; i++) zero_lanes[i] = ($urandom_range(0, 3) == 0);
        n_zero++;
      end
      we = 1'($urandom);
      waddr = 2'($urandom);
      for (int i = 0; i < Z; i++) begin wdata[i].sat = 1'($urandom); wdata[i].msg = msg_t'($urandom_range(0, 30) - 15); end
      @(posedge clk); #1;
      if (clear) clear_model();
      else if (zero_lanes != '0) begin
        for (int d = 0; d < D; d++) for (int i = 0; i < Z; i++) if (zero_lanes[i]) model[d][i].msg = '0;
      end else if (we) model[waddr] = wdata;
    end
    checks++; if (n_zero == 0) begin failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
