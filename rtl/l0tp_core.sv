// l0tp_core: Level-0 trigger processor decision logic.
//
// Holds the run configuration (per mask: enable, required primitive bits per
// source, downscaling factor), checks every time slot of primitives against all
// masks (l0tp_mask_matcher) and downscales each mask's matches
// (l0tp_downscaler). When at least one mask fires, a trigger is issued with the
// bitmap of fired masks, the bitmap of all matched masks before downscaling
// (for offline trigger studies) and the slot timestamp.
//
// Configuration: one register write per cycle through cfg (cfg_wr_t):
//   CFG_REQ    mask, src, data[PRIM_W-1:0]  required bits of that source
//   CFG_DS     mask, data[DS_W-1:0]         downscaling factor (0 = off)
//   CFG_ENABLE mask, data[0]                mask enable
// All configuration resets to 0 (every mask off).
//
// Timing: slot in cycle t -> trigger word in cycle t+1 (trig_valid one cycle).
// Masks, coincidences and per-mask downscaling follow the published processor;
// the register map, the word format and the one-cycle pipeline are this
// design's choices.
module l0tp_core
  import l0tp_pkg::*;
#(
  parameter int unsigned NSRC   = N_SRC,
  parameter int unsigned NMASKS = N_MASKS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_wr_t           cfg,
  input  logic              slot_valid,
  input  logic [TS_W-1:0]   slot_ts,
  input  prim_t             prim       [NSRC],
  input  logic [NSRC-1:0]   prim_valid,
  output logic              trig_valid,
  output logic [NMASKS-1:0] trig_masks,
  output logic [NMASKS-1:0] trig_matched,
  output logic [TS_W-1:0]   trig_ts
);

  localparam int unsigned MW = (NMASKS > 1) ? $clog2(NMASKS) : 1;
  localparam int unsigned SI = (NSRC > 1) ? $clog2(NSRC) : 1;

  logic [NMASKS-1:0] mask_en;
  prim_t             mask_req  [NMASKS][NSRC];
  logic [DS_W-1:0]   ds_factor [NMASKS];
  logic [NMASKS-1:0] match, fire;
  logic              fire_valid;
  logic [NMASKS-1:0] match_q;
  logic [TS_W-1:0]   ts_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_en <= '0;
      for (int m = 0; m < NMASKS; m++) begin
        ds_factor[m] <= '0;
        for (int s = 0; s < NSRC; s++) mask_req[m][s] <= '0;
      end
    end else if (cfg.en && int'(cfg.mask) < NMASKS) begin
      unique case (cfg.kind)
        CFG_REQ:    if (int'(cfg.src) < NSRC) mask_req[MW'(cfg.mask)][SI'(cfg.src)] <= cfg.data[PRIM_W-1:0];
        CFG_DS:     ds_factor[MW'(cfg.mask)] <= cfg.data[DS_W-1:0];
        CFG_ENABLE: mask_en[MW'(cfg.mask)] <= cfg.data[0];
        default: ;
      endcase
    end
  end

  l0tp_mask_matcher #(.NSRC(NSRC), .NMASKS(NMASKS)) u_match (
    .slot_valid, .prim, .prim_valid, .mask_en, .mask_req, .match);

  l0tp_downscaler #(.NMASKS(NMASKS)) u_ds (
    .clk, .rst_n, .match_valid(slot_valid), .match, .ds_factor, .fire_valid, .fire);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      match_q <= '0;
      ts_q    <= '0;
    end else if (slot_valid) begin
      match_q <= match;
      ts_q    <= slot_ts;
    end
  end

  assign trig_valid   = fire_valid && (fire != '0);
  assign trig_masks   = fire;
  assign trig_matched = match_q;
  assign trig_ts      = ts_q;

endmodule
