// tb_neuron_cell: drives random dot products through groups of 1 to 3
// timesteps with random threshold cells and checks spikes against the
// membrane equation V[t] = V[t-1](1-S[t-1]) + sum, S = (V >= TH), with the
// membrane preset at the first timestep of every group.
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_neuron_cell;
  logic clk = 0, rst_n = 0, th_we = 0, op = 0, first = 0;
  logic [4:0] th_cells = '0;
  logic [10:0] i_p = '0, i_n = '0;
  logic spike;
  logic signed [13:0] vmem;
  int checks = 0, failures = 0;
  int n_spikes = 0, n_reset_in_group = 0;

  neuron_cell #(.TH_CELLS(5), .VW(14)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int th, v, s_prev, s, dot, ts;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 3000; g++) begin
      if (g % 50 == 0) begin
        th_cells = 5'($urandom);
        th = $countones(th_cells);
        th_we = 1; @(negedge clk); th_we = 0;
      end
      ts = 1 + (g % 3);
      v = 0; s_prev = 0;
      for (int t = 0; t < ts; t++) begin
        i_p = 11'($urandom % 12);
        i_n = 11'($urandom % 12);
        dot = int'(i_p) - int'(i_n);
        if (t == 0 || s_prev == 1) begin
          if (t != 0) n_reset_in_group++;
          v = 0;
        end
        v = v + dot;
        s = (v >= th);
        op = 1; first = (t == 0);
        @(negedge clk);
        op = 0;
        `CHECK(spike == s[0], $sformatf("group %0d t %0d: v=%0d th=%0d spike=%0d", g, t, v, th, spike))
        `CHECK(int'(vmem) == v - th, "membrane value")
        if (s) n_spikes++;
        s_prev = s;
        // idle cycle keeps state
        if ($urandom % 4 == 0) begin @(negedge clk); `CHECK(spike == s[0], "hold") end
      end
    end
    `CHECK(n_spikes > 100, "spikes seen")
    `CHECK(n_reset_in_group > 20, "reset after spike inside a group seen")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
