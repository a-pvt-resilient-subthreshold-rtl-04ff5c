// supply_sequencer: data-access / CIM mode switching of one SRAM subbank.
//
// A subbank runs its 8T cells from 0.9 V for weight writes (data access
// mode) and from the regulated supply V_R for in-memory compute (CIM mode).
// Entering CIM mode follows the three phases the paper draws: data access,
// then WM_E high (the regulator is engaged and V_ref starts to fall from
// 0.9 V), a guard time for V_ref to settle, and only then CM_E high, which
// hands V_R to the memory units. Leaving CIM mode drops both enables in the
// same cycle; the paper does not describe that direction, so this is this
// design's choice, as is the guard-time length.
//
// Interface: cim_req level request. cim_ready is high while in CIM mode,
// access_ready while in data access mode. Timing: WM_E rises one cycle after
// cim_req, CM_E GUARD_CYCLES cycles after WM_E.
module supply_sequencer #(
  parameter int unsigned GUARD_CYCLES = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic cim_req,
  output logic wm_e,
  output logic cm_e,
  output logic cim_ready,
  output logic access_ready
);

  typedef enum logic [1:0] {ST_ACCESS, ST_GUARD, ST_CIM} state_e;

  state_e state;
  logic [$clog2(GUARD_CYCLES+1)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_ACCESS;
      cnt   <= '0;
    end else begin
      unique case (state)
        ST_ACCESS: if (cim_req) begin
          state <= ST_GUARD;
          cnt   <= '0;
        end
        ST_GUARD: begin
          if (!cim_req)                         state <= ST_ACCESS;
          else if (cnt == GUARD_CYCLES[$bits(cnt)-1:0] - 1'b1) state <= ST_CIM;
          cnt <= cnt + 1'b1;
        end
        ST_CIM: if (!cim_req) state <= ST_ACCESS;
        default: state <= ST_ACCESS;
      endcase
    end
  end

  assign wm_e         = (state != ST_ACCESS);
  assign cm_e         = (state == ST_CIM);
  assign cim_ready    = cm_e;
  assign access_ready = (state == ST_ACCESS);

  // CM_E may only be high while WM_E is high (M_1 off before M_2 turns off).
  assert property (@(posedge clk) disable iff (!rst_n) cm_e |-> wm_e);

endmodule
