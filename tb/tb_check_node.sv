// tb_check_node: random VC messages (all in +-15) and enable masks into a
// 24-input check node; each output is compared with a direct computation:
// magnitude = max(min over the other enabled inputs - 1, 0), sign = product of
// the other enabled inputs' signs, sat = product of all enabled signs is +1.
// Includes hand-worked cases and ties of the smallest magnitude.
`timescale 1ns/1ps
module tb_check_node;
  import ldpc_pkg::*;
  localparam int DC = NB;
  int checks = 0, failures = 0;
  msg_t [DC-1:0] q;
  logic [DC-1:0] en;
  c2v_t [DC-1:0] r;

  check_node #(.DC(DC), .OFFSET(1)) dut (.q(q), .en(en), .r(r));

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_all();
    for (int i = 0; i < DC; i++) begin
      int mn = 1000; bit s = 0, sall = 0; int m, e;
      for (int j = 0; j < DC; j++) if (en[j]) begin
        sall ^= q[j] < 0;
        if (j != i) begin
          s ^= q[j] < 0;
          if ((q[j] < 0 ? -int'(q[j]) : int'(q[j])) < mn) mn = (q[j] < 0 ? -int'(q[j]) : int'(q[j]));
        end
      end
      m = (mn > 1) ? mn - 1 : 0;
      e = s ? -m : m;
      if (en[i]) begin
        checks++;
        if (int'(r[i].msg) != e || r[i].sat != !sall) begin
          failures++;
          if (failures < 10) $display("input %0d: got %0d/%0d expected %0d/%0d", i, r[i].msg, r[i].sat, e, !sall);
        end
      end
    end
  endtask

  initial begin
    // Hand case: inputs 5, -3, 7 on columns 0..2 only.
    q = '0; en = '0;
    q[0] = 5; q[1] = -3; q[2] = 7; en[2:0] = 3'b111;
    #1;
    checks++; if (r[0].msg != -2) begin failures++; $display("hand r0 %0d", r[0].msg); end  // min(3,7)-1, sign -
    checks++; if (r[1].msg != 4)  begin failures++; $display("hand r1 %0d", r[1].msg); end  // min(5,7)-1, sign +
    checks++; if (r[2].msg != -2) begin failures++; $display("hand r2 %0d", r[2].msg); end
    checks++; if (r[0].sat != 1'b0) begin failures++; $display("hand sat"); end           // one negative: unsatisfied
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < DC; i++) begin
        q[i] = msg_t'($urandom_range(0, 30) - 15);
        if (t % 3 == 0) q[i] = msg_t'(($urandom_range(0, 1) != 0) ? 2 : -2);  // ties
      end
      en = DC'($urandom) | DC'($urandom);
      if (t % 5 == 0) en = '1;
      #1;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
