// tb_supply_sequencer: checks the data-access -> guard -> CIM sequence.
// WM_E must follow cim_req by one cycle, CM_E must follow WM_E by exactly
// GUARD cycles, both must drop on release, and a release during the guard
// time must return to data access without ever raising CM_E.
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_supply_sequencer;
  localparam int GUARD = 5;
  logic clk = 0, rst_n = 0, cim_req = 0;
  logic wm_e, cm_e, cim_ready, access_ready;
  int checks = 0, failures = 0;

  supply_sequencer #(.GUARD_CYCLES(GUARD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic enter_and_measure();
    int n_wm, n_cm;
    @(negedge clk) cim_req = 1;
    n_wm = 0;
    while (!wm_e) begin @(negedge clk); n_wm++; end
    `CHECK(n_wm == 1, "WM_E one cycle after request")
    `CHECK(!cm_e && !access_ready, "guard phase: CM_E low")
    n_cm = 0;
    while (!cm_e) begin @(negedge clk); n_cm++; `CHECK(wm_e, "WM_E held during guard") end
    `CHECK(n_cm == GUARD, $sformatf("guard time %0d cycles, expected %0d", n_cm, GUARD))
    `CHECK(cim_ready && wm_e, "CIM mode reached")
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(!wm_e && !cm_e && access_ready, "reset in data access mode")
    enter_and_measure();
    repeat (10) begin @(negedge clk); `CHECK(cm_e && wm_e, "CIM mode held") end
    cim_req = 0;
    @(negedge clk);
    `CHECK(!wm_e && !cm_e && access_ready, "release returns to data access")
    // release inside the guard time
    cim_req = 1;
    repeat (2) @(negedge clk);
    `CHECK(wm_e && !cm_e, "in guard time")
    cim_req = 0;
    repeat (GUARD + 2) begin @(negedge clk); `CHECK(!cm_e, "no CM_E after early release") end
    `CHECK(access_ready, "back in data access")
    enter_and_measure();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
