// tb_stb_ctrl: checks the stride-tick schedule. The testbench keeps its own
// record of which FM word went into which line buffer (a word read in one
// cycle can only be shifted in the next), and at every wordline load checks
// that line buffer t holds exactly positions b*stride .. b*stride+K-1 of
// timestep t, that the tags run b-major / t-minor with first = (t == 0), and
// that every block and timestep is computed once. The layer latency must
// be 1 + K*Ts + Nout*Ts*stride + DRAIN cycles plus one per stall cycle;
// cim_ready is dropped at random in some runs to force stalls.
// Pool-only layers must stream in_len*Ts words in address order.
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_stb_ctrl;
  import cim_pkg::*;
  localparam int DRAIN = 6;
  logic clk = 0, rst_n = 0, start = 0, cim_ready = 1;
  layer_cfg_t cfg;
  logic fm_re, lb_clear, wl_load, sc_valid, busy, done;
  logic [FM_AW-1:0] fm_raddr;
  logic [MAX_TS-1:0] lb_shift;
  logic [1:0] wl_sel, sc_t;
  op_tag_t wl_tag;
  logic [31:0] stall_cycles;
  int checks = 0, failures = 0;
  int n_stalls_seen = 0;

  stb_ctrl #(.DRAIN(DRAIN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // testbench model of the line buffers (addresses of the words they hold)
  int lbq [MAX_TS][$];
  int prev_addr;
  bit prev_re;
  int exp_b, exp_t, n_ops, n_sc, sc_addr;
  bit random_stall;

  always @(posedge clk) begin
    if (rst_n) begin
      if (lb_clear) for (int k = 0; k < MAX_TS; k++) lbq[k].delete();
      if (wl_load) begin
        int K, ts, e, g;
        K = int'(cfg.ksize);
        ts = int'(cfg.ts);
        `CHECK(int'(wl_tag.pos) == exp_b && int'(wl_tag.t) == exp_t && wl_tag.first == (exp_t == 0),
               $sformatf("tag b%0d t%0d, expected b%0d t%0d", wl_tag.pos, wl_tag.t, exp_b, exp_t))
        `CHECK(int'(wl_sel) == exp_t, "line buffer select = timestep")
        // window must be the last K words of this buffer
        `CHECK(lbq[wl_sel].size() >= K, "line buffer filled")
        for (int j = 0; j < K; j++) begin
          e = int'(cfg.in_base) + (exp_b * int'(cfg.stride) + j) * ts + exp_t;
          g = lbq[wl_sel][lbq[wl_sel].size() - K + j];
          `CHECK(g == e, $sformatf("b%0d t%0d tap %0d holds word %0d, expected %0d", exp_b, exp_t, j, g, e))
        end
        n_ops++;
        if (exp_t == ts - 1) begin exp_t = 0; exp_b++; end else exp_t++;
      end
      // the wordline register takes the window before this edge's shift
      for (int k = 0; k < MAX_TS; k++) if (lb_shift[k]) begin
        `CHECK(prev_re, "line buffer shift without a read in the cycle before")
        lbq[k].push_back(prev_addr);
      end
      if (sc_valid) begin
        `CHECK(prev_re && prev_addr == sc_addr, $sformatf("shortcut word %0d", sc_addr))
        `CHECK(int'(sc_t) == n_sc % int'(cfg.ts), "shortcut timestep")
        sc_addr++; n_sc++;
      end
      prev_re <= fm_re;
      prev_addr <= int'(fm_raddr);
      if (random_stall) cim_ready <= ($urandom % 5 != 0);
      else cim_ready <= 1'b1;
    end
  end

  task automatic run_conv(int cin, int K, int stride, int in_len, int ts, bit stall);
    int cycles, nout, lat;
    @(negedge clk);
    cfg = '0;
    cfg.mode = LAYER_CONV; cfg.cin = 8'(cin); cfg.ksize = 11'(K); cfg.stride = 4'(stride);
    cfg.in_len = 16'(in_len); cfg.pool = 1; cfg.ts = 2'(ts); cfg.in_base = 13'($urandom % 1000);
    exp_b = 0; exp_t = 0; n_ops = 0;
    random_stall = stall;
    start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    random_stall = 0;
    nout = (in_len - K) / stride + 1;
    `CHECK(n_ops == nout * ts, $sformatf("%0d computes, expected %0d", n_ops, nout * ts))
    lat = 1 + K * ts + nout * ts * stride + DRAIN + int'(stall_cycles);
    `CHECK(cycles == lat, $sformatf("latency %0d cycles, expected %0d (K%0d s%0d L%0d ts%0d stalls %0d)",
                                    cycles, lat, K, stride, in_len, ts, stall_cycles))
    if (stall_cycles != 0) n_stalls_seen++;
  endtask

  task automatic run_pool(int in_len, int ts);
    int cycles;
    @(negedge clk);
    cfg = '0;
    cfg.mode = LAYER_POOL_ONLY; cfg.in_len = 16'(in_len); cfg.pool = 2; cfg.ts = 2'(ts); cfg.stride = 1;
    cfg.in_base = 13'($urandom % 1000);
    sc_addr = int'(cfg.in_base); n_sc = 0;
    start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    `CHECK(n_sc == in_len * ts, $sformatf("%0d shortcut words, expected %0d", n_sc, in_len * ts))
    `CHECK(cycles == 1 + in_len * ts + DRAIN, $sformatf("pool-only latency %0d", cycles))
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ts = 1; ts <= 3; ts++) begin
      run_conv(8, 8, 1, 20, ts, 0);
      run_conv(16, 4, 2, 17, ts, 0);
      run_conv(4, 5, 3, 23, ts, 1);
      run_conv(128, 8, 1, 12, ts, 1);
      run_pool(9, ts);
    end
    run_conv(8, 128, 1, 140, 3, 0);
    `CHECK(n_stalls_seen > 0, "stalls exercised")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
