// tb_pp_controller: random inputs into the per-lane labeling / reweighting /
// plural-selection logic; every output bit is checked against its rule:
// inc = act & unsatisfied (fresh), rw_en = act & heat & label>=1 & sat_rd,
// flip_en = flip_now & accumulated count >= 2.
`timescale 1ns/1ps
module tb_pp_controller;
  import ldpc_pkg::*;
  localparam int Z = ZMAX;
  int checks = 0, failures = 0;
  logic act, heat, flip_now;
  logic [Z-1:0] sat_rd, sat_new, inc, rw_en, flip_en;
  logic [Z-1:0][1:0] label_cur, label_acc;

  pp_controller #(.Z(Z)) dut (.act(act), .heat(heat), .flip_now(flip_now), .sat_rd(sat_rd), .sat_new(sat_new),
    .label_cur(label_cur), .label_acc(label_acc), .inc(inc), .rw_en(rw_en), .flip_en(flip_en));

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_rw = 0, n_fl = 0;
  initial begin
    for (int t = 0; t < 500; t++) begin
      act = 1'($urandom); heat = 1'($urandom); flip_now = 1'($urandom);
      for (int i = 0; i < Z; i++) begin
        sat_rd[i] = 1'($urandom); sat_new[i] = 1'($urandom);
        label_cur[i] = 2'($urandom); label_acc[i] = 2'($urandom);
      end
      #1;
      for (int i = 0; i < Z; i++) begin
        bit e_inc, e_rw, e_fl;
        e_inc = act && !sat_new[i];
        e_rw  = act && heat && (label_cur[i] > 0) && sat_rd[i];
        e_fl  = flip_now && (label_acc[i] >= 2);
        checks++;
        if (inc[i] != e_inc || rw_en[i] != e_rw || flip_en[i] != e_fl) begin
          failures++; if (failures < 10) $display("lane %0d t %0d", i, t);
        end
        n_rw += e_rw; n_fl += e_fl;
      end
    end
    checks++; if (n_rw == 0 || n_fl == 0) begin failures++; $display("rules never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
