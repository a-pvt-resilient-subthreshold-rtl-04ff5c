// tb_cim_array: loads random ternary weights into a reduced array and
// checks the per-neuron positive/negative unit-current counts for random
// wordline patterns against sums worked out from the testbench's own copy
// of the weights. Also checks that bitlines are silent outside CIM mode,
// that writes in CIM mode are ignored, and that weight sets are separate.
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_cim_array;
  localparam int NW = 96, NN = 16, NS = 5;
  logic clk = 0, wm_e = 0, cm_e = 0, we = 0;
  logic [$clog2(NW)-1:0] waddr = '0;
  logic [2:0] wset = '0, cset = '0;
  logic [2*NN-1:0] wdata = '0;
  logic [NW-1:0] rwl = '0;
  logic [NN-1:0][10:0] i_p, i_n;
  int checks = 0, failures = 0;
  int wt [NS][NW][NN];   // -1, 0, +1

  cim_array #(.N_WL(NW), .N_NEURON(NN), .N_WSET(NS), .WS_W(3)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(int s, int r);
    @(negedge clk);
    we = 1; wset = 3'(s); waddr = $bits(waddr)'(r);
    for (int n = 0; n < NN; n++) begin
      wdata[2*n]   = (wt[s][r][n] == 1);
      wdata[2*n+1] = (wt[s][r][n] == -1);
    end
    @(negedge clk) we = 0;
  endtask

  task automatic check_pattern(int s, string what);
    int ep, en;
    #1;
    for (int n = 0; n < NN; n++) begin
      ep = 0; en = 0;
      for (int i = 0; i < NW; i++) if (rwl[i]) begin
        if (wt[s][i][n] == 1)  ep++;
        if (wt[s][i][n] == -1) en++;
      end
      `CHECK(int'(i_p[n]) == ep && int'(i_n[n]) == en,
             $sformatf("%s set %0d neuron %0d: got %0d/%0d exp %0d/%0d", what, s, n, i_p[n], i_n[n], ep, en))
    end
  endtask

  initial begin
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < NW; r++)
        for (int n = 0; n < NN; n++) wt[s][r][n] = int'($urandom % 3) - 1;
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < NW; r++) write_row(s, r);
    // outside CIM mode no current flows
    rwl = '1;
    #1;
    for (int n = 0; n < NN; n++) `CHECK(i_p[n] == 0 && i_n[n] == 0, "no current in data access mode")
    @(negedge clk) wm_e = 1; cm_e = 1;
    // writes in CIM mode are ignored (assertion disabled for this step)
    $assertoff;
    @(negedge clk) we = 1; wset = 0; waddr = 0; wdata = '1;
    @(negedge clk) we = 0;
    $asserton;
    for (int s = 0; s < NS; s++) begin
      cset = 3'(s);
      rwl = '1;               check_pattern(s, "all rows");
      rwl = '0;               check_pattern(s, "no rows");
      for (int k = 0; k < 20; k++) begin
        for (int i = 0; i < NW; i++) rwl[i] = ($urandom % 4) == 0;
        check_pattern(s, "random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
