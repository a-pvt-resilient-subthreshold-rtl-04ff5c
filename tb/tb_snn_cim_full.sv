// tb_snn_cim_full: end-to-end test of the accelerator with every parameter
// at its default (1024 wordlines, 128 neurons, 64 subbanks); see tb_top_body.svh
// for what is checked.
`timescale 1ns/1ps
`include "tb/tb_util.svh"
module tb_snn_cim_full;
  import cim_pkg::*;
  localparam int NW = 1024, NN = 128;
  localparam int CIN_A = 128, K_A = 8, LEN_A = 24, CIN_D = 128, K_D = 8;
  localparam int WATCHDOG = 200000;

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
`include "tb/tb_top_body.svh"
endmodule
