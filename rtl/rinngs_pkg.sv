// rinngs_pkg: types and constants shared by the RiNNgs ring-counting network.
//
// Number formats (signed two's complement fixed point):
//   activations  18 bit, 8 integer bits (incl. sign), 10 fraction bits
//   weights       7 bit, 1 integer bit (the sign), 6 fraction bits
//   biases        9 bit, 1 integer bit (the sign), 8 fraction bits
// The 18/8 data format and the 7 and 9 bit quantized parameters follow the
// published network; which of 7 and 9 bits goes to weights and which to biases
// is this design's reading. The hit-list length N_HITS is this design's choice.
package rinngs_pkg;

  localparam int unsigned N_CHANNELS = 1952;  // RICH photomultipliers
  localparam int unsigned CH_W       = 11;    // channel number width
  localparam int unsigned N_HITS     = 32;    // hit-list slots per event (assumed)

  localparam int unsigned DW    = 18;
  localparam int unsigned DFRAC = 10;
  localparam int unsigned WW    = 7;
  localparam int unsigned WFRAC = 6;
  localparam int unsigned BW    = 9;
  localparam int unsigned BFRAC = 8;

  localparam int unsigned L1_OUT = 64;
  localparam int unsigned L2_OUT = 16;
  localparam int unsigned L3_OUT = 4;

  localparam int unsigned II = 10;  // minimum cycles between accepted events

  localparam int unsigned IDX_W = 8;  // row/column index width of the write port

  typedef logic signed [DW-1:0] act_t;
  typedef logic signed [WW-1:0] weight_t;
  typedef logic signed [BW-1:0] bias_t;

  typedef struct packed {
    logic            valid;
    logic [CH_W-1:0] channel;
  } hit_t;

  typedef enum logic [1:0] {
    LAYER1 = 2'd0,
    LAYER2 = 2'd1,
    LAYER3 = 2'd2
  } layer_e;

  // One weight or bias write. For a weight, data[WW-1:0] is used.
  typedef struct packed {
    logic             en;
    logic             is_bias;
    layer_e           layer;
    logic [IDX_W-1:0] row;   // output neuron
    logic [IDX_W-1:0] col;   // input index (weights only)
    logic [BW-1:0]    data;
  } param_wr_t;

  // Ring-count labels: 0, 1, 2, 3-or-more rings.
  typedef logic [1:0] label_t;

endpackage
