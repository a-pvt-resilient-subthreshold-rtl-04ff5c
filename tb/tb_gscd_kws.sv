// tb_gscd_kws: the seven CIM layers of the keyword-spotting network run back
// to back on the full-size accelerator (all parameters at their defaults).
// Layer shapes: conv In=8 K=128 -> 64, In=64 K=16 -> 64, In=64 K=16 -> 128,
// three times In=128 K=8 -> 128, and a final In=128 K=8 -> 12 block. The
// network diagram gives two readings of the pooling sizes: its S row reads
// 4, 2, 1, 1, 1, 1, 1, while its pooling boxes read MP4 then MP2 for blocks
// 2 to 6. Both are run, each with the shortest input (539 and 2115
// positions x 3 timesteps of 8 channels) that leaves one output position
// after the last block. Weights and thresholds are random (the trained
// values are not available). Blocks 1-5 use weight sets 0-4; sets 0 and 1
// are then reloaded in data access mode for blocks 6 and 7. Feature maps
// ping-pong between word 0 and word 6400 of the FM SRAM. Every word written
// is compared with the reference model of tb_top_tasks.svh, and the cycle
// count is compared with the same network run with separate pooling passes.
//
// The final block is started with cfg.accum: its membrane inputs are summed
// per neuron over all positions and timesteps in the output accumulator,
// and every neuron's sum is checked (its spikes are checked as well).
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_gscd_kws;
  import cim_pkg::*;
  localparam int NW = 1024, NN = 128;
  localparam int WATCHDOG = 1000000;
  localparam int N_LAYERS = 7;

  logic clk = 0, rst_n = 0;
  logic cim_req, wm_e, cm_e, access_ready, reg_locked;
  logic signed [7:0] temp_c;
  logic [15:0] i_r_na;
  logic [19:0] v_r_uv;
  logic w_we, th_we, h_we, h_re, start, busy, done;
  logic [$clog2(NW)-1:0] w_addr;
  logic [2:0] w_set;
  logic [2*NN-1:0] w_data;
  logic [NN*5-1:0] th_cells;
  logic [12:0] h_waddr, h_raddr;
  logic [127:0] h_wdata, h_rdata;
  layer_cfg_t cfg;
  logic [31:0] stall_cycles;
  logic [15:0] n_written;
  logic [$clog2(NN)-1:0] acc_sel = '0;
  logic signed [31:0] acc_sum;
  logic [31:0] acc_ops;

  snn_cim_top dut (.*);

`include "tb/tb_top_tasks.svh"

  // neurons at or above the layer's output count get all-zero weights
  task automatic zero_unused(int s, int nout);
    for (int r = 0; r < NW; r++) begin
      @(negedge clk);
      w_we = 1; w_addr = $bits(w_addr)'(r); w_set = 3'(s);
      for (int n = 0; n < NN; n++) begin
        if (n >= nout) wt[s][r][n] = 0;
        w_data[2*n]   = (wt[s][r][n] == 1);
        w_data[2*n+1] = (wt[s][r][n] == -1);
      end
    end
    @(negedge clk) w_we = 0;
  endtask

  task automatic run_net(string name, int len_in, int pl [N_LAYERS]);
    int cin [N_LAYERS] = '{8, 64, 64, 128, 128, 128, 128};
    int cout [N_LAYERS] = '{64, 64, 128, 128, 128, 128, 12};
    int ksz [N_LAYERS] = '{128, 16, 16, 8, 8, 8, 8};
    int wsel [N_LAYERS] = '{0, 1, 2, 3, 4, 0, 1};
    int len, ib, ob, cyc, nout, total_pipe, total_orig, total_stall, spikes_before, accum_before;
    layer_cfg_t c;
    logic [127:0] w;
    go_access();
    // encoded input: 8 binary channels per word
    for (int a = 0; a < len_in * 3; a++) begin
      w = rnd_spikes(25);
      for (int b = 8; b < 128; b++) w[b] = 1'b0;
      host_write(a, w);
    end
    for (int l = 0; l < 5; l++) begin
      load_weights(wsel[l]);
      zero_unused(wsel[l], cout[l]);
    end
    load_thresholds();

    len = len_in; ib = 0; accum_before = n_accum;
    total_pipe = 0; total_orig = 0; total_stall = 0;
    for (int l = 0; l < N_LAYERS; l++) begin
      `CHECK(cin[l] * ksz[l] == NW, $sformatf("block %0d: In*K fills the wordlines", l + 1))
      if (l == 5) begin
        go_access();
        for (int k = 5; k < 7; k++) begin
          load_weights(wsel[k]);
          zero_unused(wsel[k], cout[k]);
        end
        go_cim();
      end
      ob = (l % 2 == 0) ? 6400 : 0;
      c = mk(0, cin[l], ksz[l], 1, len, pl[l], 3, wsel[l], ib, ob, l == N_LAYERS - 1);
      spikes_before = n_spikes_total;
      run_layer(c, l == 0, cyc);
      nout = len - ksz[l] + 1;
      total_stall += int'(stall_cycles);
      total_pipe += cyc - int'(stall_cycles);
      // same layer without the pooling write-back: conv pass, then a pooling pass
      total_orig += 1 + ksz[l] * 3 + nout * 3 + 6;
      if (pl[l] > 1) total_orig += 1 + nout * 3 + 6;
      `CHECK(n_spikes_total > spikes_before, $sformatf("block %0d produces spikes", l + 1))
      $display("%s block %0d: In=%0d K=%0d len=%0d -> %0d positions, pool %0d, %0d cycles, wset %0d",
               name, l + 1, cin[l], ksz[l], len, nout / pl[l], pl[l], cyc, wsel[l]);
      len = nout / pl[l]; ib = ob;
    end
    `CHECK(len == 1, "one output position after the final block")
    `CHECK(n_accum > accum_before, "final block summed in the output accumulator")
    `CHECK(total_pipe < total_orig, "pipelined pooling shortens the network")
    $display("%s network: %0d cycles with pipelined pooling (+%0d guard stall), %0d with separate pooling passes (%0d%% less)",
             name, total_pipe, total_stall, total_orig, (100 * (total_orig - total_pipe)) / total_orig);
  endtask

  initial begin
    h_we = 0; h_re = 0; h_waddr = '0; h_raddr = '0; h_wdata = '0;
    w_we = 0; w_addr = '0; w_set = '0; w_data = '0; th_we = 0; th_cells = '0;
    cim_req = 0; start = 0; cfg = '0; temp_c = 8'sd25; i_r_na = 16'd2000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_net("S-row pooling", 539, '{4, 2, 1, 1, 1, 1, 1});
    run_net("MP-box pooling", 2115, '{4, 2, 2, 2, 2, 2, 1});
    `CHECK(n_stall > 0 && n_mode_access > 0 && n_mode_cim > 0, "guard stall and weight reload happened")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
