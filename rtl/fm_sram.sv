// fm_sram: feature-map SRAM, one read port and one write port.
//
// Stores binary spike maps, one FM_W-bit word per (position, timestep).
// The read port feeds the three line buffers and the pooling shortcut path;
// the write port takes pooled results from the pooling write-back unit, so
// convolution and pooling of one layer proceed at the same time. Depth and
// port arrangement are this design's choices (the paper names the FM SRAM
// but gives neither).
//
// Timing: synchronous read, rdata valid the cycle after re; a write lands
// on the clock edge where we is high. A read of the address written in the
// same cycle returns the old word.
module fm_sram #(
  parameter int FM_W  = 128,
  parameter int DEPTH = 8192,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            re,
  input  logic [AW-1:0]   raddr,
  output logic [FM_W-1:0] rdata,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [FM_W-1:0] wdata
);

  logic [FM_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
