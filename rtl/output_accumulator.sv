// output_accumulator: membrane accumulator of the network's final block.
//
// The last block of the network has no firing neuron: its membrane input is
// summed over every timestep and every output position, and the result,
// averaged over positions (global average pooling), is what the classifier
// sees. This unit keeps one signed sum per neuron. On every op with en high
// it adds that op's signed dot product (I_P units - I_N units) to the
// neuron's sum, i.e. it integrates without threshold, reset or leak.
// clear zeroes all sums and the op counter; en on the same cycle as clear
// starts the new sum with that op.
//
// Readout: sel picks a neuron, sum shows its total combinationally, n_ops
// the number of ops summed. The global average pooling output is
// sum / n_ops. Dividing by n_ops, the same constant for every neuron, is
// left to the classifier that follows (it scales all class inputs alike);
// this is this design's choice. Summing the dot products digitally from the
// array's unit counts is also this design's reading of "an additional
// accumulator"; the published text does not give its circuit.
//
// Timing: one add per clock; sums are registered, readout is combinational.
module output_accumulator
#(
  parameter int N_NEURON = cim_pkg::N_NEURON,
  parameter int CW       = cim_pkg::CNT_W,
  parameter int AW       = 32
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               clear,
  input  logic                               en,
  input  logic [N_NEURON-1:0][CW-1:0]        i_p,
  input  logic [N_NEURON-1:0][CW-1:0]        i_n,
  input  logic [$clog2(N_NEURON)-1:0]        sel,
  output logic signed [AW-1:0]               sum,
  output logic [31:0]                        n_ops
);
  logic signed [AW-1:0] acc [N_NEURON];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N_NEURON; n++) acc[n] <= '0;
      n_ops <= '0;
    end else begin
      for (int n = 0; n < N_NEURON; n++) begin
        logic signed [AW-1:0] base, d;
        base = clear ? '0 : acc[n];
        d    = AW'($signed({1'b0, i_p[n]})) - AW'($signed({1'b0, i_n[n]}));
        acc[n] <= en ? base + d : base;
      end
      n_ops <= (clear ? 32'd0 : n_ops) + (en ? 32'd1 : 32'd0);
    end
  end

  assign sum = acc[sel];
endmodule
