// tb_supply_regulator: runs the regulator model at -20, 25 and 100 C.
// In data access mode V_ref and V_R must sit at 0.9 V; after WM_E the loop
// must settle with I_SEN within 1 % of I_R = 10 x 200 nA, and V_R (after
// CM_E) must land near the supply at which a cell draws 200 nA at that
// temperature: 219 mV at -20 C, 330 mV at 100 C, and the straight line
// between them at 25 C (reference values from the paper's Sec. II-B).
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_supply_regulator;
  logic clk = 0, rst_n = 0, wm_e = 0, cm_e = 0;
  logic signed [7:0] temp_c = 25;
  logic [15:0] i_r_na = 16'd2000;
  logic [19:0] v_ref_uv, v_r_uv;
  logic [31:0] i_sen_na;
  logic locked;
  int checks = 0, failures = 0;

  supply_regulator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int tc, int exp_mv);
    int settle;
    @(negedge clk) temp_c = 8'(tc); wm_e = 0; cm_e = 0;
    repeat (2) @(negedge clk);
    `CHECK(v_ref_uv == 900000 && v_r_uv == 900000, "0.9 V in data access mode")
    wm_e = 1;
    settle = 0;
    while (!(i_sen_na * 100 > 99 * 2000 && i_sen_na * 100 < 101 * 2000) && settle < 1000) begin
      @(negedge clk); settle++;
      `CHECK(v_r_uv == 900000, "V_R stays at 0.9 V until CM_E")
    end
    `CHECK(settle < 200, $sformatf("settled in %0d cycles at %0d C", settle, tc))
    cm_e = 1;
    repeat (20) @(negedge clk);
    `CHECK(locked, $sformatf("locked at %0d C (I_SEN %0d nA)", tc, i_sen_na))
    `CHECK(v_r_uv == v_ref_uv, "V_R = V_ref in CIM mode")
    `CHECK(int'(v_r_uv) > (exp_mv - 5) * 1000 && int'(v_r_uv) < (exp_mv + 5) * 1000,
           $sformatf("V_R %0d uV at %0d C, expected about %0d mV", v_r_uv, tc, exp_mv))
    // reference current doubled: V_R must rise
    begin
      int v_before = int'(v_r_uv);
      i_r_na = 16'd4000;
      repeat (100) @(negedge clk);
      `CHECK(int'(v_r_uv) > v_before + 5000 && locked, "higher I_R -> higher V_R, relocked")
      i_r_na = 16'd2000;
      repeat (100) @(negedge clk);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(-20, 219);
    run(25, 219 + 45 * 111 / 120);
    run(100, 330);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
