// cim_pkg: constants and types shared by the subthreshold SRAM CIM accelerator.
//
// The accelerator runs binary-activation, ternary-weight spiking convolution
// layers on a 1024-wordline SRAM compute-in-memory array with 128 neuron
// cells. One layer is described by a layer_cfg_t; feature maps live in the
// FM SRAM as one 128-bit word per (position, timestep), at
// base + position*ts + timestep.
//
// From the paper: 1024 wordlines, 128 neurons, 1 to 3 timesteps, 128-bit
// pooling buffers, five replica cells per threshold. The configuration record,
// the address layout and all field widths are this design's own choices.
package cim_pkg;

  localparam int N_WL     = 1024;  // simultaneously active read wordlines
  localparam int N_NEURON = 128;   // neuron cells / output channels
  localparam int FM_W     = 128;   // feature-map word: one position, all channels
  localparam int MAX_TS   = 3;     // timesteps supported (1..3)
  localparam int TH_CELLS = 5;     // replica SRAM cells per threshold generator
  localparam int CNT_W    = 11;    // bitline unit-current count, 0..1024
  localparam int FM_AW    = 13;    // FM SRAM address width (8192 words)
  localparam int POS_W    = 16;    // position counter width

  typedef enum logic [0:0] {
    LAYER_CONV      = 1'b0,   // CIM convolution, optional pipelined pooling
    LAYER_POOL_ONLY = 1'b1    // max pooling over the shortcut path, no CIM
  } layer_mode_e;

  typedef struct packed {
    layer_mode_e       mode;
    logic [7:0]        cin;       // input channels per position (1..128)
    logic [10:0]       ksize;     // kernel taps (positions), cin*ksize <= N_WL
    logic [3:0]        stride;    // conv stride in positions (>= 1)
    logic [POS_W-1:0]  in_len;    // input positions
    logic [2:0]        pool;      // max-pool window S (1 = no pooling)
    logic [1:0]        ts;        // timesteps 1..3
    logic [2:0]        wset;      // weight set of the CIM array
    logic [FM_AW-1:0]  in_base;   // FM address of input position 0, timestep 0
    logic [FM_AW-1:0]  out_base;  // FM address of output position 0, timestep 0
    logic              accum;     // final block: also sum the membrane inputs per neuron
  } layer_cfg_t;

  // Tag that travels with one compute (or shortcut word) down the pipeline.
  typedef struct packed {
    logic [POS_W-1:0] pos;   // conv output position (or input position in pool-only)
    logic [1:0]       t;     // timestep 0..ts-1
    logic             first; // first timestep of the group: neuron preset
  } op_tag_t;

endpackage
