// firefly_pkg: types and constants shared by the FireFly spiking-network core.
//
// The core computes one spiking convolutional (or fully connected) layer at a
// time. Input and output spike maps are tiled P channels at a time; a 3x3
// window of P channels forms the M = 9*P rows of the synaptic crossbar and the
// N = P columns are output channels. P = 16 (a 144x16 crossbar) is the default
// configuration; P = 32 gives the larger 288x32 configuration.
//
// side_t is the sideband that travels with every spike vector from the input
// datapath through the systolic array to the update engine. It carries the
// pixel address inside the map and the loop position of Algorithm-style
// scheduling (output group > timestep > input tile > pixel), so that the
// membrane update engine can pick its phase without a counter of its own.
// cfg_t is the per-layer configuration written by the host before a layer.
package firefly_pkg;

  localparam int unsigned P_DEF    = 16;   // channel tiling / parallelism factor
  localparam int unsigned KWIN     = 9;    // 3x3 kernel window
  localparam int unsigned WB       = 8;    // INT8 synaptic weights
  localparam int unsigned LANE_W   = 12;   // DSP SIMD lane width (FOUR12)
  localparam int unsigned CHAIN    = 8;    // DSP slices per PE cascade
  localparam int unsigned PE_ROWS  = 16;   // crossbar rows per PE (2 per slice)
  localparam int unsigned PE_COLS  = 4;    // crossbar columns per PE (SIMD lanes)
  localparam int unsigned PSUM_W   = 16;   // adder-tree output width
  localparam int unsigned VW       = 24;   // membrane voltage / psum buffer width
  localparam int unsigned MAP_AW   = 12;   // pixel address width (48x48 = 2304 pixels)
  localparam int unsigned MAP_DEPTH= 2304; // unified buffer depth
  localparam int unsigned MAX_W    = 64;   // widest spike map supported by the line buffer
  localparam int unsigned DIM_W    = 8;    // width of H/W/loop-count registers

  typedef enum logic {MODE_CONV = 1'b0, MODE_MLP = 1'b1} mode_e;

  // Phases of the Psum-Vmem update FSM.
  typedef enum logic [1:0] {PH_ACC = 2'd0, PH_THRESH = 2'd1, PH_CLEAR = 2'd2} phase_e;

  typedef struct packed {
    logic [MAP_AW-1:0] addr;        // pixel index inside the map (0 in MLP mode)
    logic              tile_first;  // first vector of an input tile: switch weights
    logic              map_last;    // last vector of the tile (end of the pass)
    logic              tile_last;   // this tile is the last input-channel tile
    logic              step_last;   // this is the last timestep
    logic              group_first; // first tile of the first timestep of an output group
    logic              layer_last;  // last output group of the layer
  } side_t;

  typedef struct packed {
    mode_e                   mode;       // SCNN (line buffer) or MLP (shift register)
    logic [DIM_W-1:0]        h;          // map height (conv), >= 2
    logic [DIM_W-1:0]        w;          // map width  (conv), >= 2
    logic [DIM_W-1:0]        ci;         // input-channel tiles c_i
    logic [DIM_W-1:0]        co;         // output-channel groups c_o
    logic [DIM_W-1:0]        steps;      // timesteps T
    logic                    leak_en;    // LIF (1) or IF (0)
    logic [3:0]              leak_shift; // leak: v - (v >>> leak_shift)
    logic signed [VW-1:0]    vth;        // firing threshold
    logic                    pool_en;    // 2x2 max pooling on the output spikes
  } cfg_t;

endpackage
