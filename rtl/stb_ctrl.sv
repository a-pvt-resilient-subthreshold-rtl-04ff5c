// stb_ctrl: stride-tick batching sequencer for one layer.
//
// Stride-tick batching computes every timestep T1..Ts of one input block
// back to back, so each neuron keeps its membrane between timesteps on its
// own capacitor and no membrane buffer is needed; then the window moves on
// by the stride. To keep input reuse, each timestep has its own line buffer:
// while block b is computed, the stride's new positions of block b+1 are
// shifted into the buffer of each timestep right after that buffer has been
// latched onto the wordlines. The schedule below is this design's.
//
// CONV layer, one FM SRAM read per cycle:
//   prefill  K*Ts cycles: words in_base .. in_base+K*Ts-1 (positions 0..K-1,
//            all timesteps) go to line buffer (word mod Ts);
//   run      for block b, timestep t, s = 0..stride-1: one cycle each; at
//            s = 0 line buffer t is latched onto the wordlines (compute,
//            tag {b, t, first = (t==0)}), and position b*stride+K+s of
//            timestep t is shifted into line buffer t if it exists.
//   drain    DRAIN cycles for the compute/pooling pipeline, then done.
// With stride 1 a layer takes 1 + K*Ts + Nout*Ts + DRAIN cycles,
// Nout = (in_len-K)/stride + 1.
// POOL_ONLY layer: reads in_len*Ts words in order and hands them to the
// pooling unit over the shortcut path (sc_valid) tagged with their timestep.
//
// Pipeline: stage A generates the micro-op and its FM read address; stage B,
// one cycle later, has the read data and drives lb_shift / wl_load /
// sc_valid. While cim_ready is low (subbank not in CIM mode) stage A holds
// and B idles: a stall. Pool-only layers do not use the array and do not
// stall. stall_cycles counts the stalled cycles of the current layer.
module stb_ctrl
  import cim_pkg::*;
#(
  parameter int DRAIN = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg,
  input  logic             cim_ready,
  output logic             fm_re,
  output logic [FM_AW-1:0] fm_raddr,
  output logic             lb_clear,
  output logic [MAX_TS-1:0] lb_shift,
  output logic             wl_load,
  output logic [1:0]       wl_sel,
  output op_tag_t          wl_tag,
  output logic             sc_valid,
  output logic [1:0]       sc_t,
  output logic             busy,
  output logic             done,
  output logic [31:0]      stall_cycles
);

  typedef enum logic [2:0] {S_IDLE, S_PREFILL, S_RUN, S_POOL, S_DRAIN} state_e;

  state_e           state;
  layer_cfg_t       c;
  logic [POS_W-1:0] r;        // prefill / pool-only word counter
  logic [POS_W-1:0] b;        // output block
  logic [POS_W-1:0] ld_base;  // b*stride + K: first new position of block b+1
  logic [1:0]       t;
  logic [3:0]       s;
  logic [3:0]       dcnt;

  // stage A outputs (combinational)
  logic             a_valid, a_shift, a_compute, a_sc, advance;
  logic [1:0]       a_sel;
  logic [FM_AW-1:0] a_addr;
  op_tag_t          a_tag;
  logic [POS_W-1:0] ld_pos;
  logic [POS_W+1:0] ld_pos_ts;
  logic             last_t, last_s, last_b;

  always_comb begin
    ld_pos    = ld_base + POS_W'(s);
    unique case (c.ts)
      2'd2:    ld_pos_ts = (POS_W+2)'({ld_pos, 1'b0});
      2'd3:    ld_pos_ts = (POS_W+2)'({ld_pos, 1'b0}) + (POS_W+2)'(ld_pos);
      default: ld_pos_ts = (POS_W+2)'(ld_pos);
    endcase
    last_t    = (t == c.ts - 2'd1);
    last_s    = (s == c.stride - 4'd1);
    last_b    = (ld_base + POS_W'(c.stride) > c.in_len);

    a_valid   = 1'b0;
    a_shift   = 1'b0;
    a_compute = 1'b0;
    a_sc      = 1'b0;
    a_sel     = t;
    a_addr    = c.in_base + FM_AW'(r);
    a_tag     = '{pos: b, t: t, first: (t == 2'd0)};
    unique case (state)
      S_PREFILL: begin
        a_valid = 1'b1;
        a_shift = 1'b1;
      end
      S_RUN: begin
        a_valid   = 1'b1;
        a_shift   = (ld_pos < c.in_len);
        a_compute = (s == 4'd0);
        a_addr    = c.in_base + FM_AW'(ld_pos_ts) + FM_AW'(t);
      end
      S_POOL: begin
        a_valid = 1'b1;
        a_sc    = 1'b1;
        a_tag   = '{pos: b, t: t, first: (t == 2'd0)};
      end
      default: ;
    endcase
    advance = a_valid && (cim_ready || state == S_POOL);
  end

  assign fm_re    = advance && (a_shift || a_sc);
  assign fm_raddr = a_addr;

  // stage A sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c <= '0;
      r <= '0; b <= '0; ld_base <= '0; t <= '0; s <= '0; dcnt <= '0;
      stall_cycles <= '0;
    end else begin
      if (a_valid && !advance) stall_cycles <= stall_cycles + 1;
      unique case (state)
        S_IDLE: if (start) begin
          c <= cfg;
          stall_cycles <= '0;
          r <= '0; b <= '0; t <= '0; s <= '0;
          ld_base <= POS_W'(cfg.ksize);
          state <= (cfg.mode == LAYER_POOL_ONLY) ? S_POOL : S_PREFILL;
        end
        S_PREFILL: if (advance) begin
          t <= last_t ? 2'd0 : t + 2'd1;
          r <= r + 1'b1;
          if (r == POS_W'(c.ksize) * POS_W'(c.ts) - 1'b1) begin
            state <= S_RUN;
            t <= '0;
          end
        end
        S_RUN: if (advance) begin
          s <= last_s ? 4'd0 : s + 4'd1;
          if (last_s) begin
            t <= last_t ? 2'd0 : t + 2'd1;
            if (last_t) begin
              b       <= b + 1'b1;
              ld_base <= ld_base + POS_W'(c.stride);
              if (last_b) begin
                state <= S_DRAIN;
                dcnt  <= '0;
              end
            end
          end
        end
        S_POOL: if (advance) begin
          r <= r + 1'b1;
          t <= last_t ? 2'd0 : t + 2'd1;
          if (last_t) begin
            b <= b + 1'b1;
            if (b == c.in_len - 1'b1) begin
              state <= S_DRAIN;
              dcnt  <= '0;
            end
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 4'(DRAIN - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // stage B
  logic    b_valid, b_shift, b_compute, b_sc;
  logic [1:0] b_sel;
  op_tag_t b_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0; b_shift <= 1'b0; b_compute <= 1'b0; b_sc <= 1'b0;
      b_sel <= '0; b_tag <= '0; done <= 1'b0;
    end else begin
      b_valid   <= advance;
      b_shift   <= a_shift;
      b_compute <= a_compute;
      b_sc      <= a_sc;
      b_sel     <= a_sel;
      b_tag     <= a_tag;
      done      <= (state == S_DRAIN) && (dcnt == 4'(DRAIN - 1));
    end
  end

  always_comb begin
    for (int k = 0; k < MAX_TS; k++) lb_shift[k] = b_valid && b_shift && (b_sel == 2'(k));
  end
  assign wl_load  = b_valid && b_compute;
  assign wl_sel   = b_sel;
  assign wl_tag   = b_tag;
  assign sc_valid = b_valid && b_sc;
  assign sc_t     = b_tag.t;
  assign lb_clear = (state == S_IDLE) && start;
  assign busy     = (state != S_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (cfg.ts >= 2'd1 && cfg.stride != 0 && cfg.pool != 0));

endmodule
