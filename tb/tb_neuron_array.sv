// tb_neuron_array: 16 neurons with different thresholds receive independent
// random currents for 3-timestep groups; each neuron's spike is checked
// against its own reference membrane.
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_neuron_array;
  localparam int NN = 16;
  logic clk = 0, rst_n = 0, th_we = 0, op = 0, first = 0;
  logic [NN*5-1:0] th_cells = '0;
  logic [NN-1:0][10:0] i_p = '0, i_n = '0;
  logic [NN-1:0] spikes;
  int checks = 0, failures = 0;

  neuron_array #(.N_NEURON(NN), .TH_CELLS(5)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int th [NN];
    int v [NN];
    bit s [NN];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NN; n++) begin
      th_cells[n*5 +: 5] = 5'($urandom);
      th[n] = $countones(th_cells[n*5 +: 5]);
    end
    th_we = 1; @(negedge clk); th_we = 0;
    for (int g = 0; g < 500; g++) begin
      for (int t = 0; t < 3; t++) begin
        for (int n = 0; n < NN; n++) begin
          i_p[n] = 11'($urandom % 10);
          i_n[n] = 11'($urandom % 10);
          if (t == 0 || s[n]) v[n] = 0;
          v[n] += int'(i_p[n]) - int'(i_n[n]);
          s[n] = (v[n] >= th[n]);
        end
        op = 1; first = (t == 0);
        @(negedge clk);
        op = 0;
        for (int n = 0; n < NN; n++)
          `CHECK(spikes[n] == s[n], $sformatf("g %0d t %0d neuron %0d", g, t, n))
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
