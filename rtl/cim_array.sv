// cim_array: behavioural model of the 8T SRAM compute-in-memory array.
//
// Behavioural model. The silicon array is analog: every 8T cell whose read
// wordline (RWL) is high and whose node Q stores 1 sinks one unit current
// (about 200 nA under the regulated supply) into its read bitline, and the
// bitline currents of all 1024 rows add up. This model replaces the
// current sum by an exact count of unit currents, which is what the
// regulation loop aims for; offsets and mismatch are not modelled. The code
// is synthesizable, but it stands for an analog macro.
//
// Weights are ternary. Each neuron owns two bitlines: a cell on the positive
// bitline (I_P side) and one on the negative bitline (I_N side). +1 stores
// (pos=1,neg=0), -1 stores (0,1), 0 stores (0,0). Row layout of wdata and of
// the storage: bit 2n is neuron n's positive cell, bit 2n+1 its negative
// cell. The array holds N_WSET weight sets side by side (5 x 256 of the
// 1304 physical bitlines in this design's reading of the column count); cset
// picks the set used for compute, wset the one written.
//
// Modes: writes are accepted only in data access mode (wm_e low); bitline
// currents flow only in CIM mode (cm_e high). i_p/i_n are combinational in
// rwl and cset, as the bitline currents are in the array.
// Weight rows are stored column-wise (one vector per bitline) so that each
// bitline sum is a population count of rwl AND column.
module cim_array
#(
  parameter int N_WL     = cim_pkg::N_WL,
  parameter int N_NEURON = cim_pkg::N_NEURON,
  parameter int N_WSET   = 5,
  parameter int WS_W     = 3
) (
  input  logic                             clk,
  input  logic                             wm_e,
  input  logic                             cm_e,
  // weight write port (data access mode)
  input  logic                             we,
  input  logic [$clog2(N_WL)-1:0]          waddr,
  input  logic [WS_W-1:0]                  wset,
  input  logic [2*N_NEURON-1:0]            wdata,
  // compute port (CIM mode)
  input  logic [N_WL-1:0]                  rwl,
  input  logic [WS_W-1:0]                  cset,
  output logic [N_NEURON-1:0][cim_pkg::CNT_W-1:0]   i_p,
  output logic [N_NEURON-1:0][cim_pkg::CNT_W-1:0]   i_n
);

  // Storage is kept per bitline (column): colp/coln[set][n] hold the
  // positive and negative cells of neuron n for all wordlines.
  logic [N_WL-1:0] colp [N_WSET][N_NEURON];
  logic [N_WL-1:0] coln [N_WSET][N_NEURON];

  function automatic logic [cim_pkg::CNT_W-1:0] popcount(input logic [N_WL-1:0] v);
    logic [cim_pkg::CNT_W-1:0] c;
    c = '0;
    for (int i = 0; i < N_WL; i++) c = c + cim_pkg::CNT_W'(v[i]);
    return c;
  endfunction

  logic active;
  assign active = cm_e && (int'(cset) < N_WSET);

  for (genvar n = 0; n < N_NEURON; n++) begin : g_col
    always_ff @(posedge clk) begin
      if (we && !wm_e && int'(wset) < N_WSET) begin
        colp[wset][n][waddr] <= wdata[2*n];
        coln[wset][n][waddr] <= wdata[2*n+1];
      end
    end
    // bitline current = number of selected cells that store 1
    assign i_p[n] = active ? popcount(rwl & colp[cset][n]) : '0;
    assign i_n[n] = active ? popcount(rwl & coln[cset][n]) : '0;
  end

  // A weight write during CIM mode would disturb the regulated subbank.
  assert property (@(posedge clk) we |-> !wm_e);

endmodule
