// tb_pwb: streams spike vectors in stride-tick order (all timesteps of a
// position, then the next position), with random idle gaps, through the
// pooling write-back unit for pool sizes 1, 2, 4 and 1 to 3 timesteps, over
// both MUX inputs (CIM and short cut path). The written words are checked
// against OR-pooling computed here, at address out_base + q*ts + t, and
// the number of writes is checked. The latency from the last input to its
// write is checked to be 3 cycles.
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_pwb;
  localparam int W = 128;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, src_fm = 0;
  logic [2:0] pool = 1;
  logic [1:0] ts = 1, in_t = 0;
  logic [12:0] out_base = 0;
  logic [W-1:0] cim_spk = '0, fm_data = '0;
  logic fm_we;
  logic [12:0] fm_waddr;
  logic [W-1:0] fm_wdata;
  logic [15:0] n_written;
  int checks = 0, failures = 0;

  pwb #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect writes
  logic [W-1:0] got [int];
  int n_got, last_write_cycle, cycle;
  always @(posedge clk) begin
    cycle++;
    if (fm_we) begin got[int'(fm_waddr)] = fm_wdata; n_got++; last_write_cycle = cycle; end
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int w = 0; w < W/32; w++) v[w*32 +: 32] = $urandom & $urandom;  // sparse
    return v;
  endfunction

  task automatic run(int p, int nt, int npos, bit shortcut);
    logic [W-1:0] vec [64][3];
    logic [W-1:0] e;
    int nq, last_in_cycle;
    @(negedge clk);
    pool = 3'(p); ts = 2'(nt); out_base = 13'($urandom % 4000); src_fm = shortcut;
    clear = 1; @(negedge clk); clear = 0;
    got.delete(); n_got = 0;
    for (int q = 0; q < npos; q++)
      for (int t = 0; t < nt; t++) begin
        vec[q][t] = rnd();
        while ($urandom % 3 == 0) @(negedge clk);
        in_valid = 1; in_t = 2'(t);
        if (shortcut) begin fm_data = vec[q][t]; cim_spk = rnd(); end
        else          begin cim_spk = vec[q][t]; fm_data = rnd(); end
        @(negedge clk);
        last_in_cycle = cycle;
        in_valid = 0;
      end
    repeat (5) @(negedge clk);
    nq = npos / p;
    `CHECK(n_got == nq * nt, $sformatf("pool %0d ts %0d npos %0d: %0d writes, exp %0d", p, nt, npos, n_got, nq*nt))
    `CHECK(int'(n_written) == nq * nt, "write counter")
    for (int q = 0; q < nq; q++)
      for (int t = 0; t < nt; t++) begin
        e = '0;
        for (int j = 0; j < p; j++) e |= vec[q*p + j][t];
        `CHECK(got.exists(int'(out_base) + q*nt + t) && got[int'(out_base) + q*nt + t] == e,
               $sformatf("pool %0d ts %0d q %0d t %0d", p, nt, q, t))
      end
    if (npos % p == 0)
      `CHECK(last_write_cycle - last_in_cycle == 2, $sformatf("write latency %0d", last_write_cycle - last_in_cycle))
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++) begin
      int p = (k == 0) ? 1 : (k == 1) ? 2 : 4;
      for (int nt = 1; nt <= 3; nt++) begin
        run(p, nt, 8 + int'($urandom % 10), 1'b0);
        run(p, nt, 8, 1'b1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
