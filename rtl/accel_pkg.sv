// accel_pkg: types and default sizes shared by the accelerator core.
//
// The core computes one layer tile per job. A job is described by a layer_cfg_t
// that the host writes through the register file before it starts the job, and
// that the layer engine latches when the job begins, so the host can already
// program the next job while the current one runs.
//
// Following the paper: weights and activations are 8-bit integers, the core
// handles convolution, fully connected layers (a convolution whose kernel covers
// the whole input), pooling and activation, and kernel size, channel count and
// stride are set at run time. This design's own choices: the field widths, the
// lane count of 8 (one 64-bit bus word of 8-bit values), 32-bit accumulators,
// max pooling as the pooling kind, ReLU as the activation and a right shift as
// the requantisation step.
package accel_pkg;

  // Default sizes of the core.
  localparam int unsigned DEF_LANES      = 8;     // parallel MAC lanes = output channels per group
  localparam int unsigned DEF_DATA_W     = 8;     // INT8 weights and activations
  localparam int unsigned DEF_ACC_W      = 32;    // accumulator width
  localparam int unsigned DEF_ACT_DEPTH  = 4096;  // words per bank of the feature-map buffer
  localparam int unsigned DEF_WGT_DEPTH  = 4096;  // words per bank of the weight buffer
  localparam int unsigned DEF_PSUM_DEPTH = 1024;  // entries of the partial-sum buffer
  localparam int unsigned DEF_FIFO_DEPTH = 16;    // output FIFO entries

  // Widths of the run-time configuration fields.
  localparam int unsigned CH_W     = 12;  // channel count
  localparam int unsigned DIM_W    = 10;  // tile height / width
  localparam int unsigned K_W      = 4;   // kernel height / width
  localparam int unsigned STRIDE_W = 3;
  localparam int unsigned GRP_W    = 8;   // number of output-channel groups
  localparam int unsigned SHIFT_W  = 5;

  typedef enum logic {
    MODE_CONV    = 1'b0,  // multiply-accumulate (convolution and fully connected)
    MODE_MAXPOOL = 1'b1   // running maximum per channel
  } mode_e;

  typedef struct packed {
    mode_e                 mode;
    logic                  relu;      // apply ReLU before requantising
    logic                  first_ci;  // first input-channel tile: do not add stored partial sums
    logic                  last_ci;   // last input-channel tile: emit outputs instead of storing sums
    logic                  keep_wgt;  // keep the weight bank for the next job
    logic [SHIFT_W-1:0]    shift;     // requantisation right shift
    logic [CH_W-1:0]       in_c;      // input channels in the tile
    logic [DIM_W-1:0]      in_h;      // tile height (already padded)
    logic [DIM_W-1:0]      in_w;      // tile width (already padded)
    logic [K_W-1:0]        k_h;
    logic [K_W-1:0]        k_w;
    logic [STRIDE_W-1:0]   stride;
    logic [GRP_W-1:0]      groups;    // output-channel groups of LANES channels
  } layer_cfg_t;

  // Register map of the AXI4-Lite register file (byte addresses).
  localparam logic [7:0] REG_CTRL   = 8'h00;  // W: bit0 = start a job
  localparam logic [7:0] REG_STATUS = 8'h04;  // R: see csr_axil
  localparam logic [7:0] REG_CH     = 8'h08;  // in_c[11:0]
  localparam logic [7:0] REG_DIM    = 8'h0C;  // in_h[9:0], in_w[25:16]
  localparam logic [7:0] REG_KERN   = 8'h10;  // k_h[3:0], k_w[11:8], stride[18:16]
  localparam logic [7:0] REG_GROUPS = 8'h14;  // groups[7:0]
  localparam logic [7:0] REG_FLAGS  = 8'h18;  // mode[0] relu[1] first[2] last[3] keep[4] shift[12:8]
  localparam logic [7:0] REG_JOBS   = 8'h1C;  // R: jobs completed; W: clear the overflow flag
  localparam logic [7:0] REG_BUSYCYC  = 8'h20;  // R: cycles the engine was busy; W: clear
  localparam logic [7:0] REG_STALLCYC = 8'h24;  // R: cycles the engine waited on the output; W: clear

endpackage
