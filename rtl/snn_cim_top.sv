// snn_cim_top: subthreshold SRAM compute-in-memory SNN accelerator.
//
// Runs one binary-spike, ternary-weight 1-D convolution layer per start on
// a 1024-wordline CIM array with 128 neurons, using stride-tick batching:
// all timesteps of one input window are computed back to back so the
// membrane never leaves the neuron.
//
//   FM SRAM --read--> line buffer T1/T2/T3 --(wordline register)--> CIM array
//      ^                                                               |
//      |                                                     I_P, I_N per neuron
//      |                                                               v
//      +---write--- pooling write-back (PWB) <--spikes-- 128 neuron cells
//      +---------- short cut path (pool-only layers) ------^
//                                              I_P, I_N --> output accumulator
//                                                           (final block)
//
// The network's final block has no firing neuron: a layer started with
// cfg.accum also sums each neuron's dot products over all its ops in
// output_accumulator, read through acc_sel/acc_sum/acc_ops.
//
// The array's supply is switched by supply_sequencer (data access mode for
// weight writes, CIM mode for compute) and regulated per subbank by N_SUB
// supply_regulator models. The stride-tick controller stalls while the
// array is not in CIM mode.
//
// Pipeline per compute: controller stage A (FM read address) -> stage B
// (line buffer shift, wordline register load) -> array + neurons (spikes
// registered) -> PWB output buffer -> PWB write buffer -> FM SRAM.
//
// Host side (this design's own, the paper gives no host interface): weight
// rows are written through w_* in data access mode, replica threshold cells
// through th_*, and the FM SRAM is loaded and read through h_* while no
// layer runs (h_* has priority only when busy is low). The reference
// current i_r_na and the temperature are inputs because the reference
// generator and the die are analog.
module snn_cim_top
  import cim_pkg::*;
#(
  parameter int N_WL_P     = cim_pkg::N_WL,
  parameter int N_NEUR_P   = cim_pkg::N_NEURON,
  parameter int N_WSET     = 5,
  parameter int FM_DEPTH   = 8192,
  parameter int N_SUB      = 64,
  parameter int GUARD_CYC  = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // mode and analog conditions
  input  logic                         cim_req,
  input  logic signed [7:0]            temp_c,
  input  logic [15:0]                  i_r_na,
  output logic                         wm_e,
  output logic                         cm_e,
  output logic                         access_ready,
  output logic                         reg_locked,
  output logic [19:0]                  v_r_uv,
  // weight and threshold programming
  input  logic                         w_we,
  input  logic [$clog2(N_WL_P)-1:0]    w_addr,
  input  logic [2:0]                   w_set,
  input  logic [2*N_NEUR_P-1:0]        w_data,
  input  logic                         th_we,
  input  logic [N_NEUR_P*TH_CELLS-1:0] th_cells,
  // host feature-map access
  input  logic                         h_we,
  input  logic [FM_AW-1:0]             h_waddr,
  input  logic [FM_W-1:0]              h_wdata,
  input  logic                         h_re,
  input  logic [FM_AW-1:0]             h_raddr,
  output logic [FM_W-1:0]              h_rdata,
  // layer control
  input  layer_cfg_t                   cfg,
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  output logic [31:0]                  stall_cycles,
  output logic [15:0]                  n_written,
  // final-block membrane sums (layers started with cfg.accum)
  input  logic [$clog2(N_NEUR_P)-1:0]  acc_sel,
  output logic signed [31:0]           acc_sum,
  output logic [31:0]                  acc_ops
);

  // ---------------- supply mode and regulation ----------------
  logic cim_ready;
  supply_sequencer #(.GUARD_CYCLES(GUARD_CYC)) u_seq (
    .clk, .rst_n, .cim_req, .wm_e, .cm_e, .cim_ready, .access_ready
  );

  logic [N_SUB-1:0] locked_v;
  logic [19:0]      vr_v [N_SUB];
  for (genvar k = 0; k < N_SUB; k++) begin : g_sub
    logic [19:0] v_ref_unused;
    logic [31:0] i_sen_unused;
    supply_regulator u_reg (
      .clk, .rst_n, .wm_e, .cm_e, .temp_c, .i_r_na,
      .v_ref_uv (v_ref_unused),
      .v_r_uv   (vr_v[k]),
      .i_sen_na (i_sen_unused),
      .locked   (locked_v[k])
    );
  end
  assign reg_locked = &locked_v;
  assign v_r_uv     = vr_v[0];

  // ---------------- controller ----------------
  layer_cfg_t       cfg_q;
  logic             c_fm_re, lb_clear, wl_load, sc_valid;
  logic [FM_AW-1:0] c_fm_raddr;
  logic [MAX_TS-1:0] lb_shift;
  logic [1:0]       wl_sel, sc_t;
  op_tag_t          wl_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              cfg_q <= '0;
    else if (start && !busy) cfg_q <= cfg;
  end

  stb_ctrl u_ctrl (
    .clk, .rst_n, .start (start && !busy), .cfg, .cim_ready,
    .fm_re (c_fm_re), .fm_raddr (c_fm_raddr), .lb_clear, .lb_shift,
    .wl_load, .wl_sel, .wl_tag, .sc_valid, .sc_t, .busy, .done, .stall_cycles
  );

  // ---------------- FM SRAM ----------------
  logic             fm_re, fm_we, p_we;
  logic [FM_AW-1:0] fm_raddr, fm_waddr, p_waddr;
  logic [FM_W-1:0]  fm_rdata, fm_wdata, p_wdata;

  assign fm_re    = busy ? c_fm_re    : h_re;
  assign fm_raddr = busy ? c_fm_raddr : h_raddr;
  assign fm_we    = busy ? p_we       : h_we;
  assign fm_waddr = busy ? p_waddr    : h_waddr;
  assign fm_wdata = busy ? p_wdata    : h_wdata;
  assign h_rdata  = fm_rdata;

  fm_sram #(.FM_W(FM_W), .DEPTH(FM_DEPTH), .AW(FM_AW)) u_fm (
    .clk, .re (fm_re), .raddr (fm_raddr), .rdata (fm_rdata),
    .we (fm_we), .waddr (fm_waddr), .wdata (fm_wdata)
  );

  // ---------------- line buffers, one per timestep ----------------
  logic [N_WL_P-1:0] lb_win [MAX_TS];
  for (genvar k = 0; k < MAX_TS; k++) begin : g_lb
    line_buffer #(.N_WL(N_WL_P), .FM_W(FM_W)) u_lb (
      .clk, .rst_n, .clear (lb_clear), .shift (lb_shift[k]),
      .cin (cfg_q.cin), .din (fm_rdata), .win (lb_win[k])
    );
  end

  // ---------------- wordline register ----------------
  logic [N_WL_P-1:0] rwl;
  logic              wl_valid;
  op_tag_t           wl_tag_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rwl      <= '0;
      wl_valid <= 1'b0;
      wl_tag_q <= '0;
    end else begin
      wl_valid <= wl_load;
      if (wl_load) begin
        rwl      <= lb_win[wl_sel];
        wl_tag_q <= wl_tag;
      end
    end
  end

  // ---------------- CIM array and neurons ----------------
  logic [N_NEUR_P-1:0][CNT_W-1:0] i_p, i_n;
  cim_array #(.N_WL(N_WL_P), .N_NEURON(N_NEUR_P), .N_WSET(N_WSET), .WS_W(3)) u_array (
    .clk, .wm_e, .cm_e,
    .we (w_we), .waddr (w_addr), .wset (w_set), .wdata (w_data),
    .rwl, .cset (cfg_q.wset), .i_p, .i_n
  );

  logic [N_NEUR_P-1:0] spikes;
  logic                sp_valid;
  op_tag_t             sp_tag;
  neuron_array #(.N_NEURON(N_NEUR_P), .TH_CELLS(TH_CELLS)) u_neurons (
    .clk, .rst_n, .th_we, .th_cells, .op (wl_valid), .first (wl_tag_q.first),
    .i_p, .i_n, .spikes
  );
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_valid <= 1'b0;
      sp_tag   <= '0;
    end else begin
      sp_valid <= wl_valid;
      sp_tag   <= wl_tag_q;
    end
  end

  // ---------------- final-block accumulator ----------------
  // A layer started with cfg.accum clears the sums and adds every op's dot
  // product; spikes are still produced and written as for any layer.
  output_accumulator #(.N_NEURON(N_NEUR_P), .CW(CNT_W), .AW(32)) u_acc (
    .clk, .rst_n, .clear (start && !busy && cfg.accum), .en (wl_valid && cfg_q.accum),
    .i_p, .i_n, .sel (acc_sel), .sum (acc_sum), .n_ops (acc_ops)
  );

  // ---------------- pooling write-back ----------------
  logic [FM_W-1:0] spk_w;
  assign spk_w = FM_W'(spikes);

  pwb #(.W(FM_W)) u_pwb (
    .clk, .rst_n, .clear (lb_clear), .pool (cfg_q.pool), .ts (cfg_q.ts),
    .out_base (cfg_q.out_base),
    .in_valid (sc_valid || sp_valid),
    .src_fm   (sc_valid),
    .cim_spk  (spk_w),
    .fm_data  (fm_rdata),
    .in_t     (sc_valid ? sc_t : sp_tag.t),
    .fm_we    (p_we), .fm_waddr (p_waddr), .fm_wdata (p_wdata),
    .n_written
  );

  // A layer may only be started with the weight set and sizes it can hold.
  assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy && cfg.mode == LAYER_CONV) |->
      (int'(cfg.cin) * int'(cfg.ksize) <= N_WL_P && int'(cfg.wset) < N_WSET && cfg.cin <= 8'(FM_W)));

endmodule
