// supply_regulator: behavioural model of one subbank's in-situ monitor and
// distributed regulator.
//
// Behavioural model of an analog circuit, written in integer fixed point
// (microvolts, picoamperes) so that it elaborates everywhere.
// Ten SRAM cells of the subbank store 1 and serve as monitor sensors. Their
// summed read current I_SEN is compared with a reference current I_R by a
// transimpedance error amplifier, which drives V_ref until I_SEN = I_R. The
// sensors and the memory cells share that supply, so every cell then sinks
// the same unit current whatever the temperature or process corner, which
// is what keeps the current-mode sum in the array usable with a 1-bit
// readout.
//
// Supply switches (names from the paper): with WM_E low, M1 ties V_ref to
// 0.9 V; with CM_E low, M2 ties the subbank supply V_R to 0.9 V. With WM_E
// high the loop runs and V_ref falls into subthreshold; with CM_E also high,
// M_S hands V_ref to the subbank (V_R = V_ref).
//
// Cell model (this design's own, fitted to the paper's numbers): a sensor
// cell draws I_UNIT * exp((V - V0(T)) / (1.5 kT/q)), with V0 linear from
// 219 mV at -20 C to 330 mV at 100 C, the supply voltages at which the
// paper reports a 200 nA cell. exp is evaluated as 2^x with a quadratic
// fraction (error below 0.5 %). The amplifier is an integrator updated each
// clock, step = EA_GAIN_UV * (I_R - I_SEN)/I_R limited to +-SLEW_UV; its
// transistor-level gain stage is not modelled. locked is high in CIM mode
// when I_SEN is within 1 % of I_R.
//
// Interface: temp_c in degrees C, i_r_na in nA (from the reference
// generator), v_ref_uv / v_r_uv in microvolts, i_sen_na in nA.
module supply_regulator #(
  parameter int K_SENS     = 10,
  parameter int I_UNIT_PA  = 200_000,
  parameter int EA_GAIN_UV = 20_000,
  parameter int SLEW_UV    = 20_000
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wm_e,
  input  logic               cm_e,
  input  logic signed [7:0]  temp_c,
  input  logic [15:0]        i_r_na,
  output logic [19:0]        v_ref_uv,
  output logic [19:0]        v_r_uv,
  output logic [31:0]        i_sen_na,
  output logic               locked
);

  localparam longint VDD_UV = 900_000;

  // current of one sensor cell in pA at supply v_uv and temperature tc
  function automatic longint cell_pa(input longint v_uv, input longint tc);
    longint v0, nvt, x, y, ip, f, m, i;
    v0  = 219_000 + (tc + 20) * 925;              // 111 mV over 120 C
    nvt = (3 * 8617 * (tc + 273)) / 200;          // 1.5 * kT/q in uV
    x   = ((v_uv - v0) * 65536) / nvt;            // Q16 exponent
    y   = (x * 94548) / 65536;                    // x / ln 2
    ip  = y >>> 16;
    f   = y - (ip * 65536);
    m   = 65536 + ((f * 43024) >>> 16) + ((((f * f) >>> 16) * 22512) >>> 16);
    i   = (longint'(I_UNIT_PA) * m) >>> 16;
    if (ip > 20)  ip = 20;
    if (ip < -40) ip = -40;
    return (ip >= 0) ? (i <<< ip) : (i >>> (-ip));
  endfunction

  longint isen_pa, ir_pa, err_pa, step_uv, v_ref_l;

  always_comb begin
    v_ref_l  = longint'(v_ref_uv);
    isen_pa  = longint'(K_SENS) * cell_pa(v_ref_l, longint'(temp_c));
    ir_pa    = longint'(i_r_na) * 1000;
    err_pa   = ir_pa - isen_pa;
    step_uv  = (ir_pa == 0) ? 0 : (longint'(EA_GAIN_UV) * err_pa) / ir_pa;
    if (step_uv >  longint'(SLEW_UV)) step_uv =  longint'(SLEW_UV);
    if (step_uv < -longint'(SLEW_UV)) step_uv = -longint'(SLEW_UV);
    i_sen_na = 32'(isen_pa / 1000);
    v_r_uv   = cm_e ? v_ref_uv : 20'(VDD_UV);
    locked   = wm_e && cm_e && (err_pa * 100 < ir_pa) && (-err_pa * 100 < ir_pa);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     v_ref_uv <= 20'(VDD_UV);
    else if (!wm_e) v_ref_uv <= 20'(VDD_UV);
    else if (v_ref_l + step_uv < 0) v_ref_uv <= '0;
    else            v_ref_uv <= 20'(v_ref_l + step_uv);
  end

endmodule
