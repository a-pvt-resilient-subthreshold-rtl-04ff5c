// tb_line_buffer: fills the 1024-bit window with K positions for each
// channel count the paper's layers use (8, 64, 128) and checks that tap j,
// channel c sits at bit j*cin + c, that channels above cin are masked off,
// and that one more shift moves the window by exactly one position.
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_line_buffer;
  localparam int N_WL = 1024, FM_W = 128;
  logic clk = 0, rst_n = 0, clear = 0, shift = 0;
  logic [7:0] cin;
  logic [FM_W-1:0] din;
  logic [N_WL-1:0] win;
  int checks = 0, failures = 0;
  logic [FM_W-1:0] pos_data [0:200];

  line_buffer #(.N_WL(N_WL), .FM_W(FM_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int c_in, input int extra);
    int k = N_WL / c_in;
    @(negedge clk) clear = 1; cin = 8'(c_in);
    @(negedge clk) clear = 0;
    for (int p = 0; p < k + extra; p++) begin
      for (int w = 0; w < FM_W/32; w++) pos_data[p][w*32 +: 32] = $urandom;
      din = pos_data[p]; shift = 1;
      @(negedge clk);
      shift = 0;
    end
    // window holds positions extra .. extra+k-1
    for (int j = 0; j < k; j++)
      for (int c = 0; c < c_in; c++)
        `CHECK(win[j*c_in + c] == pos_data[extra + j][c],
               $sformatf("cin=%0d tap %0d ch %0d", c_in, j, c))
    // hold when shift is low
    din = '1;
    @(negedge clk);
    for (int c = 0; c < c_in; c++)
      `CHECK(win[c] == pos_data[extra][c], "hold without shift")
  endtask

  initial begin
    cin = 8; din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(8, 0);
    run(8, 3);
    run(64, 0);
    run(64, 1);
    run(128, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
