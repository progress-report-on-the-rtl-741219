// l0tp_pkg: types and constants of the L0 trigger processor logic.
//
// The number of primitive sources, masks, primitive-word width, downscaling
// counter width and timestamp width are this design's choices; the published
// processor only states that masks of primitive coincidences are applied and
// that each mask has a programmable downscaling factor.
package l0tp_pkg;

  localparam int unsigned N_DET   = 8;          // external detector links
  localparam int unsigned N_SRC   = N_DET + 1;  // + RiNNgs ring-count primitive
  localparam int unsigned N_MASKS = 16;
  localparam int unsigned PRIM_W  = 16;
  localparam int unsigned DS_W    = 16;
  localparam int unsigned TS_W    = 32;

  typedef logic [PRIM_W-1:0] prim_t;

  typedef enum logic [1:0] {
    CFG_REQ    = 2'd0,  // required primitive bits of (mask, source)
    CFG_DS     = 2'd1,  // downscaling factor of a mask, 0 = mask off
    CFG_ENABLE = 2'd2   // mask enable bit (data[0])
  } cfg_kind_e;

  typedef struct packed {
    logic        en;
    cfg_kind_e   kind;
    logic [7:0]  mask;
    logic [7:0]  src;
    logic [31:0] data;
  } cfg_wr_t;

endpackage
