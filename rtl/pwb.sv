// pwb: pooling write-back unit.
//
// Sits between the neuron spike outputs and the FM SRAM so that max pooling
// runs in the same pass as the convolution instead of in a pass of its own.
// Structure as the paper draws it: a MUX that takes either the CIM spike
// vector or the FM SRAM "short cut path", a 128-bit output buffer, a bank of
// 128 two-input OR gates (max of binary spikes) fed back from the mp buffer,
// and a 128-bit write buffer in front of the FM SRAM write port.
//
// Spike vectors arrive in stride-tick order: all timesteps of conv position
// p, then of p+1. Pooling is over S consecutive positions of the same
// timestep, so this design keeps one mp buffer per timestep (the paper's
// figure shows one, which is the Ts=1 case). When the last position of a
// window arrives its pooled vector goes to the write buffer. Outputs are
// written in arrival order, so the write address is out_base plus a running
// count, which puts pooled position q, timestep t at out_base + q*ts + t.
// Positions left over at the end that do not fill a window are dropped.
// S = 1 passes every vector through unchanged.
//
// Timing: input at edge 0 -> output buffer at edge 1 -> write buffer at
// edge 2 -> word in the FM SRAM at edge 3. clear (one cycle, before a
// layer) resets the window and address counters.
module pwb
  import cim_pkg::*;
#(
  parameter int W = cim_pkg::FM_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [2:0]       pool,
  input  logic [1:0]       ts,
  input  logic [FM_AW-1:0] out_base,
  input  logic             in_valid,
  input  logic             src_fm,
  input  logic [W-1:0]     cim_spk,
  input  logic [W-1:0]     fm_data,
  input  logic [1:0]       in_t,
  output logic             fm_we,
  output logic [FM_AW-1:0] fm_waddr,
  output logic [W-1:0]     fm_wdata,
  output logic [15:0]      n_written
);

  // output buffer
  logic         ob_valid;
  logic [1:0]   ob_t;
  logic [W-1:0] ob;
  // pooling state
  logic [2:0]   ph;                 // position inside the pooling window
  logic [W-1:0] mp [MAX_TS];        // mp buffer per timestep
  logic [W-1:0] pooled;
  logic [FM_AW-1:0] wcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_valid <= 1'b0;
      ob_t     <= '0;
      ob       <= '0;
    end else begin
      ob_valid <= in_valid && !clear;
      ob_t     <= in_t;
      ob       <= src_fm ? fm_data : cim_spk;
    end
  end

  // 128 OR gates: window start takes the new vector alone
  assign pooled = (ph == 3'd0) ? ob : (ob | mp[ob_t]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph        <= '0;
      wcnt      <= '0;
      fm_we     <= 1'b0;
      fm_waddr  <= '0;
      fm_wdata  <= '0;
      n_written <= '0;
      for (int k = 0; k < MAX_TS; k++) mp[k] <= '0;
    end else if (clear) begin
      ph        <= '0;
      wcnt      <= '0;
      fm_we     <= 1'b0;
      n_written <= '0;
    end else begin
      fm_we <= 1'b0;
      if (ob_valid) begin
        mp[ob_t] <= pooled;
        if (ph == pool - 3'd1) begin
          fm_we     <= 1'b1;
          fm_waddr  <= out_base + wcnt;
          fm_wdata  <= pooled;
          wcnt      <= wcnt + 1'b1;
          n_written <= n_written + 1'b1;
        end
        if (ob_t == ts - 2'd1) ph <= (ph == pool - 3'd1) ? 3'd0 : ph + 3'd1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) ob_valid |-> (pool != 0 && ob_t < ts));

endmodule
