// hetrax_pkg: sizes and types shared by the ReRAM-tier RTL.
//
// The ReRAM tier computes the feed-forward (FF) layers of a transformer with
// weight-stationary ReRAM crossbars. The numbers below follow the tier
// specification: 16 cores in a 4x4 grid, 16 tiles per core, 96 crossbars of
// 128x128 cells per tile, 2 bits per cell, 1-bit row DACs, 8-bit ADCs and
// 16-bit operands. Everything else here (the command encoding of the
// vertical link, the accumulator width, the weight bias) is this design's own
// choice, explained where it is used.
package hetrax_pkg;

  // ---- operand precision and crossbar geometry (from the specification) ----
  localparam int unsigned DATA_W      = 16;   // 16-bit activations and weights
  localparam int unsigned XB_ROWS     = 128;  // crossbar rows
  localparam int unsigned XB_COLS     = 128;  // crossbar columns
  localparam int unsigned CELL_BITS   = 2;    // bits stored per ReRAM cell
  localparam int unsigned ADC_BITS    = 8;    // ADC resolution
  localparam int unsigned XB_PER_TILE = 96;   // crossbars (and ADCs) per tile
  localparam int unsigned TILES_PER_CORE = 16;
  localparam int unsigned CORES       = 16;   // ReRAM cores in the tier (4x4)
  localparam int unsigned GRID_DIM    = 4;

  // ---- derived sizes ----
  // A 16-bit weight is cut into 8 slices of 2 bits, one per crossbar, so the
  // 96 crossbars of a tile form 12 groups of 8 (12 x 128 x 8 row DACs).
  localparam int unsigned SLICES      = DATA_W / CELL_BITS;          // 8
  localparam int unsigned GROUPS      = XB_PER_TILE / SLICES;        // 12
  localparam int unsigned TILE_IN     = GROUPS * XB_ROWS;            // 1536 inputs per tile
  localparam int unsigned CORE_OUT    = TILES_PER_CORE * XB_COLS;    // 2048 outputs per core

  // Column sum range of one crossbar for a 1-bit input vector.
  localparam int unsigned COLSUM_W    = $clog2(XB_ROWS * ((1 << CELL_BITS) - 1) + 1); // 9

  // Weights are stored with an offset of 2^15 so that every cell holds a
  // non-negative conductance level: u = w + 2^15.
  localparam int unsigned WEIGHT_BIAS = 1 << (DATA_W - 1);

  // Accumulator width: 1536 products of two 16-bit numbers, plus the
  // partial sum chained in from a neighbouring core.
  localparam int unsigned ACC_W       = 48;

  // ---- commands arriving over the vertical link ----
  typedef enum logic [2:0] {
    CMD_WEIGHT = 3'd0,  // program one 16-bit weight into a tile's crossbars
    CMD_INPUT  = 3'd1,  // write one activation into a core's input buffer
    CMD_RUN    = 3'd2,  // run the core's matrix-vector multiply
    CMD_READ   = 3'd3,  // read one accumulated output of a core
    CMD_FWD    = 3'd4   // pass a core's outputs to the next core's input buffer
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e      op;
    logic [3:0]   core;    // destination ReRAM core 0..15
    logic [3:0]   tile;    // tile within the core (CMD_WEIGHT)
    logic [3:0]   group;   // crossbar group within the tile (CMD_WEIGHT)
    logic [6:0]   row;     // crossbar row (CMD_WEIGHT)
    logic [10:0]  index;   // column (CMD_WEIGHT), buffer index (CMD_INPUT/READ)
    logic         acc_prev;// CMD_RUN: add the previous core's outputs
    logic [5:0]   shift;   // CMD_FWD: right shift applied before saturation
    logic [DATA_W-1:0] data;
  } cmd_t;

endpackage
