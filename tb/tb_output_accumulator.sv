// tb_output_accumulator: drives random unit counts into a 16-neuron
// accumulator with random enables and occasional clears, keeps its own sums
// and compares every neuron's sum and the op count after each cycle.
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_output_accumulator;
  localparam int NN = 16, CW = 11, AW = 32;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [NN-1:0][CW-1:0] i_p, i_n;
  logic [$clog2(NN)-1:0] sel;
  logic signed [AW-1:0] sum;
  logic [31:0] n_ops;
  int checks = 0, failures = 0;
  longint ref_sum [NN];
  int ref_ops = 0;

  output_accumulator #(.N_NEURON(NN), .CW(CW), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    i_p = '0; i_n = '0; sel = '0;
    for (int n = 0; n < NN; n++) ref_sum[n] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      en = ($urandom % 4) != 0;
      clear = ($urandom % 200) == 0;
      for (int n = 0; n < NN; n++) begin
        // mostly small counts, sometimes the full range of 1024 units
        i_p[n] = (($urandom % 8) == 0) ? CW'($urandom % 1025) : CW'($urandom % 40);
        i_n[n] = (($urandom % 8) == 0) ? CW'($urandom % 1025) : CW'($urandom % 40);
      end
      if (clear) begin
        for (int n = 0; n < NN; n++) ref_sum[n] = 0;
        ref_ops = 0;
      end
      if (en) begin
        for (int n = 0; n < NN; n++) ref_sum[n] += longint'(i_p[n]) - longint'(i_n[n]);
        ref_ops++;
      end
      @(posedge clk); #1;
      en = 0; clear = 0;
      for (int n = 0; n < NN; n++) begin
        sel = $clog2(NN)'(n); #1;
        `CHECK(longint'(sum) == ref_sum[n], $sformatf("it %0d neuron %0d sum %0d exp %0d", it, n, sum, ref_sum[n]))
      end
      `CHECK(int'(n_ops) == ref_ops, $sformatf("op count %0d exp %0d", n_ops, ref_ops))
    end
    // a long run with the largest positive input: no wrap below 2^31
    @(negedge clk);
    clear = 1; en = 1;
    for (int n = 0; n < NN; n++) begin i_p[n] = CW'(1024); i_n[n] = '0; end
    @(negedge clk) clear = 0;
    repeat (4999) @(negedge clk);
    en = 0; sel = '0; #1;
    `CHECK(sum == 32'sd5120000, $sformatf("5000 ops of +1024: %0d", sum))
    `CHECK(n_ops == 32'd5000, "5000 ops counted")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
