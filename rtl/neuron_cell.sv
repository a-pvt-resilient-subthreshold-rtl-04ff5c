// neuron_cell: behavioural model of one spiking neuron cell.
//
// Behavioural model. In silicon the positive and negative bitline currents
// are integrated on two capacitors, a threshold current I_TH from replica
// SRAM cells is added on one side, a clocked comparator compares the two
// integrator voltages and a NOR latch holds the spike. Here the membrane is
// an exact integer: V = (units on I_P) - (units on I_N) accumulated over the
// timesteps of one group, with the threshold cells counted once at every
// preset.
//
// Behaviour per op (one clock edge with op high), following
//   V[t] = V[t-1]*(1-S[t-1]) + sum_i W_i*IN_i[t],  S[t] = (V[t] >= V_th):
//   - if first (first timestep of a group) or the previous op spiked, the
//     membrane is preset and I_TH is injected: acc = -TH + (i_p - i_n);
//   - otherwise acc = vmem + (i_p - i_n);
//   - spike = (acc >= 0), i.e. the integrated dot product reached TH.
// vmem keeps acc (the membrane with the threshold already taken off).
// With Ts=1 every op is first, so the cell acts as a binary CNN neuron.
//
// Threshold: TH is the number of the TH_CELLS replica cells that store 1,
// written with th_we. That five cells make one I_TH follows the paper;
// taking programmability as the number of cells holding 1 is this design's
// reading.
module neuron_cell
#(
  parameter int TH_CELLS = cim_pkg::TH_CELLS,
  parameter int VW       = 14
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                th_we,
  input  logic [TH_CELLS-1:0] th_cells,
  input  logic                op,
  input  logic                first,
  input  logic [cim_pkg::CNT_W-1:0]    i_p,
  input  logic [cim_pkg::CNT_W-1:0]    i_n,
  output logic                spike,
  output logic signed [VW-1:0] vmem
);

  logic [TH_CELLS-1:0] th_q;
  logic signed [VW-1:0] th_units, base, acc;

  always_comb begin
    th_units = '0;
    for (int k = 0; k < TH_CELLS; k++) th_units = th_units + VW'(th_q[k]);
    base = (first || spike) ? -th_units : vmem;
    acc  = base + VW'(signed'({1'b0, i_p})) - VW'(signed'({1'b0, i_n}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      th_q  <= '0;
      vmem  <= '0;
      spike <= 1'b0;
    end else begin
      if (th_we) th_q <= th_cells;
      if (op) begin
        vmem  <= acc;
        spike <= (acc >= 0);
      end
    end
  end

endmodule
