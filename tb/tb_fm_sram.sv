// tb_fm_sram: random writes and reads against an associative reference;
// checks the one-cycle read latency and old-data on read-during-write.
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_fm_sram;
  localparam int W = 128, DEPTH = 8192, AW = 13;
  logic clk = 0, re = 0, we = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [W-1:0] rdata, wdata = '0;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [int];

  fm_sram #(.FM_W(W), .DEPTH(DEPTH), .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int w = 0; w < W/32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    logic [W-1:0] expv;
    // fill a set of addresses including both ends
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      we = 1;
      waddr = (i == 0) ? '0 : (i == 1) ? AW'(DEPTH-1) : AW'($urandom % DEPTH);
      wdata = rnd();
      ref_mem[int'(waddr)] = wdata;
    end
    @(negedge clk) we = 0;
    foreach (ref_mem[a]) begin
      re = 1; raddr = AW'(a);
      @(negedge clk);
      re = 0;
      `CHECK(rdata == ref_mem[a], $sformatf("read addr %0d", a))
    end
    // read during write to the same address returns the old word
    raddr = '0; waddr = '0; re = 1; we = 1; wdata = ~ref_mem[0];
    expv = ref_mem[0];
    @(negedge clk);
    re = 0; we = 0;
    `CHECK(rdata == expv, "read-during-write returns old data")
    re = 1;
    @(negedge clk);
    `CHECK(rdata == ~expv, "new data after write")
    // rdata holds while re is low
    re = 0; raddr = 1;
    @(negedge clk);
    `CHECK(rdata == ~expv, "rdata holds without re")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
