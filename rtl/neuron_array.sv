// neuron_array: the 128 neuron cells that read the CIM array's bitlines.
//
// Behavioural model (its cells are analog in silicon, see neuron_cell).
// All cells share the op/first controls: one op integrates one timestep of
// one input block on every output channel at once, and spikes is the
// 128-bit spike vector of that timestep, valid from the edge after the op.
// th_cells holds the replica-cell contents of all neurons (neuron n at
// [n*TH_CELLS +: TH_CELLS]); th_we writes them all.
module neuron_array
#(
  parameter int N_NEURON = cim_pkg::N_NEURON,
  parameter int TH_CELLS = cim_pkg::TH_CELLS
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             th_we,
  input  logic [N_NEURON*TH_CELLS-1:0]     th_cells,
  input  logic                             op,
  input  logic                             first,
  input  logic [N_NEURON-1:0][cim_pkg::CNT_W-1:0]   i_p,
  input  logic [N_NEURON-1:0][cim_pkg::CNT_W-1:0]   i_n,
  output logic [N_NEURON-1:0]              spikes
);

  for (genvar n = 0; n < N_NEURON; n++) begin : g_neuron
    logic signed [13:0] vmem_unused;
    neuron_cell #(.TH_CELLS(TH_CELLS), .VW(14)) u_cell (
      .clk, .rst_n, .th_we,
      .th_cells (th_cells[n*TH_CELLS +: TH_CELLS]),
      .op, .first,
      .i_p      (i_p[n]),
      .i_n      (i_n[n]),
      .spike    (spikes[n]),
      .vmem     (vmem_unused)
    );
  end

endmodule
