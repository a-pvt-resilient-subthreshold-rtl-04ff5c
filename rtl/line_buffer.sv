// line_buffer: input line buffer of one timestep for stride-tick batching.
//
// Holds the sliding window of the last K input positions that drives the
// 1024 read wordlines. Each shift loads one position (cin channels, taken
// from the low bits of a 128-bit FM SRAM word) at the top and drops the
// oldest cin bits at the bottom, so moving the window by one position costs
// one FM read and all other positions are reused. The accelerator keeps one
// such buffer per timestep (three in all), as the paper proposes; the bit
// order of the window is this design's own choice.
//
// Window layout after K shifts with K*cin = N_WL: tap j (0 = oldest
// position), channel c sits at win[j*cin + c].
// Timing: win updates on the clock edge where shift is high.
module line_buffer #(
  parameter int N_WL = 1024,
  parameter int FM_W = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            shift,
  input  logic [7:0]      cin,
  input  logic [FM_W-1:0] din,
  output logic [N_WL-1:0] win
);

  logic [N_WL-1:0]      din_top;
  logic [N_WL+FM_W-1:0] din_ext;

  // Channel c of din lands at bit N_WL - cin + c; channels >= cin fall off
  // the top and are dropped.
  always_comb begin
    din_ext = {din, {N_WL{1'b0}}} >> cin;
    din_top = din_ext[N_WL-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      win <= '0;
    else if (clear)  win <= '0;
    else if (shift)  win <= (win >> cin) | din_top;
  end

endmodule
