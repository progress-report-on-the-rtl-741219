// l0tpp_top: L0 trigger processor with the RiNNgs ring counter on the same device.
//
// Each time slot brings the RICH hit list of an event together with the
// primitives of the other N_DET detectors and a timestamp. RiNNgs classifies
// the hit list as 0, 1, 2 or 3-or-more rings; this label becomes an extra
// primitive (source index N_DET) encoded as
//   bit0: label == 0   bit1: label >= 1   bit2: label >= 2   bit3: label == 3
// so that a mask can ask for "at least k rings" with one required bit. The
// other primitives and the timestamp wait in a shift register of the RiNNgs
// latency, so the L0 core sees all primitives of the slot in the same cycle
// and issues the trigger decision one cycle later.
//
// Interface: ev_valid/ev_ready handshake (ev_ready follows the RiNNgs event
// interval of 10 cycles); nn_wr loads network weights and cfg the trigger
// configuration, both from the control processor; trig_* is the decision;
// nn_valid/nn_label/nn_scores show each network result for monitoring.
// Timing: slot accepted in cycle t -> trig_valid in cycle t + 20 + 1.
//
// Putting the network and the trigger processor on one device follows the
// published plan; how the label enters the masks and how slots are aligned
// are this design's choices. Network links, the control processor and the
// run control are outside this module.
module l0tpp_top
  import rinngs_pkg::*;
  import l0tp_pkg::*;
#(
  parameter int unsigned NH     = N_HITS,
  parameter int unsigned NDET   = N_DET,
  parameter int unsigned NMASKS = N_MASKS,
  parameter int unsigned L1_LANES = 4,
  parameter int unsigned L2_LANES = 8,
  parameter int unsigned L3_LANES = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // time slot input
  input  logic              ev_valid,
  output logic              ev_ready,
  input  hit_t              ev_hits       [NH],
  input  prim_t             ev_prim       [NDET],
  input  logic [NDET-1:0]   ev_prim_valid,
  input  logic [TS_W-1:0]   ev_ts,
  // configuration
  input  param_wr_t         nn_wr,
  input  cfg_wr_t           cfg,
  // trigger decision
  output logic              trig_valid,
  output logic [NMASKS-1:0] trig_masks,
  output logic [NMASKS-1:0] trig_matched,
  output logic [TS_W-1:0]   trig_ts,
  // RiNNgs monitor
  output logic              nn_valid,
  output label_t            nn_label,
  output act_t              nn_scores [L3_OUT]
);

  localparam int unsigned DELAY = ((NH + L1_LANES - 1) / L1_LANES + 1)
                                + ((L1_OUT + L2_LANES - 1) / L2_LANES + 1)
                                + ((L2_OUT + L3_LANES - 1) / L3_LANES + 1);
  localparam int unsigned NSRC = NDET + 1;

  typedef struct packed {
    logic                  valid;
    logic [NDET-1:0]       prim_valid;
    logic [NDET*PRIM_W-1:0] prim;
    logic [TS_W-1:0]       ts;
  } slot_t;

  slot_t  dly [DELAY];
  slot_t  slot_in;
  prim_t  prim_all [NSRC];
  logic [NSRC-1:0] prim_valid_all;
  prim_t  nn_prim;
  logic   accept;

  assign accept = ev_valid && ev_ready;

  rinngs #(.NH(NH), .L1_LANES(L1_LANES), .L2_LANES(L2_LANES), .L3_LANES(L3_LANES)) u_nn (
    .clk, .rst_n, .in_valid(ev_valid), .in_ready(ev_ready), .hits(ev_hits),
    .out_valid(nn_valid), .label(nn_label), .scores(nn_scores), .pwr(nn_wr));

  always_comb begin
    slot_in.valid      = accept;
    slot_in.prim_valid = ev_prim_valid;
    slot_in.ts         = ev_ts;
    for (int d = 0; d < NDET; d++) slot_in.prim[d*PRIM_W +: PRIM_W] = ev_prim[d];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DELAY; i++) dly[i] <= '0;
    end else begin
      dly[0] <= slot_in;
      for (int i = 1; i < DELAY; i++) dly[i] <= dly[i-1];
    end
  end

  always_comb begin
    nn_prim    = '0;
    nn_prim[0] = (nn_label == 2'd0);
    nn_prim[1] = (nn_label >= 2'd1);
    nn_prim[2] = (nn_label >= 2'd2);
    nn_prim[3] = (nn_label == 2'd3);
    for (int d = 0; d < NDET; d++) prim_all[d] = dly[DELAY-1].prim[d*PRIM_W +: PRIM_W];
    prim_all[NDET] = nn_prim;
    prim_valid_all = {nn_valid, dly[DELAY-1].prim_valid};
  end

  l0tp_core #(.NSRC(NSRC), .NMASKS(NMASKS)) u_l0tp (
    .clk, .rst_n, .cfg, .slot_valid(dly[DELAY-1].valid), .slot_ts(dly[DELAY-1].ts),
    .prim(prim_all), .prim_valid(prim_valid_all), .trig_valid, .trig_masks, .trig_matched,
    .trig_ts);

  // The delayed slot and the network result must meet.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n) dly[DELAY-1].valid == nn_valid)
    else $error("l0tpp_top: slot and RiNNgs result out of step");

endmodule
