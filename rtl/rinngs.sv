// rinngs: RiNNgs, the RICH ring-counting neural network (64-16-4, ReLU).
//
// An event is the RICH hit list (N_HITS slots of valid + PMT channel). It is
// normalized by the channel count (rinngs_normalizer), passed through three
// fully connected ReLU layers of 64, 16 and 4 neurons (rinngs_dense) and the
// largest of the four outputs gives the label: 0, 1, 2 or 3-or-more rings
// (rinngs_argmax). The layers run as a pipeline: while layer 2 works on one
// event, layer 1 can take the next.
//
// Interface: in_valid/in_ready handshake. in_ready drops for II-1 cycles after
// each accepted event, so events are at least II = 10 cycles apart (at 100 MHz,
// 10 MHz of events). out_valid pulses for one cycle LATENCY = 20 cycles after
// the event was accepted, with label and scores. pwr writes one weight or bias
// per cycle (trained values, loaded by the control processor).
//
// The layer sizes, ReLU, number formats, II = 10 and latency = 20 (quantized
// design) follow the published network; the list length, the LANES split that
// yields those figures and the handshake are this design's choices.
module rinngs
  import rinngs_pkg::*;
#(
  parameter int unsigned NH       = N_HITS,
  parameter int unsigned L1_LANES = 4,
  parameter int unsigned L2_LANES = 8,
  parameter int unsigned L3_LANES = 16,
  parameter int unsigned EV_II    = II
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  hit_t      hits [NH],
  output logic      out_valid,
  output label_t    label,
  output act_t      scores [L3_OUT],
  input  param_wr_t pwr
);

  localparam int unsigned S1 = (NH + L1_LANES - 1) / L1_LANES;
  localparam int unsigned S2 = (L1_OUT + L2_LANES - 1) / L2_LANES;
  localparam int unsigned S3 = (L2_OUT + L3_LANES - 1) / L3_LANES;
  localparam int unsigned LATENCY = (S1 + 1) + (S2 + 1) + (S3 + 1);
  localparam int unsigned CW = $clog2(EV_II + 1);

  act_t x  [NH];
  act_t h1 [L1_OUT];
  act_t h2 [L2_OUT];
  logic busy1, busy2, busy3, done1, done2, done3;
  logic accept;
  logic [CW-1:0] since;

  assign in_ready = (int'(since) >= EV_II);
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) since <= CW'(EV_II);
    else if (accept) since <= CW'(1);
    else if (int'(since) < EV_II) since <= since + 1'b1;
  end

  rinngs_normalizer #(.NH(NH)) u_norm (.hits(hits), .x(x));

  rinngs_dense #(.N_IN(NH), .N_OUT(L1_OUT), .LANES(L1_LANES)) u_l1 (
    .clk, .rst_n, .start(accept), .in_vec(x), .busy(busy1), .done(done1), .out_vec(h1),
    .wr_en(pwr.en && pwr.layer == LAYER1), .wr_bias(pwr.is_bias), .wr_row(pwr.row),
    .wr_col(pwr.col), .wr_data(pwr.data));

  rinngs_dense #(.N_IN(L1_OUT), .N_OUT(L2_OUT), .LANES(L2_LANES)) u_l2 (
    .clk, .rst_n, .start(done1), .in_vec(h1), .busy(busy2), .done(done2), .out_vec(h2),
    .wr_en(pwr.en && pwr.layer == LAYER2), .wr_bias(pwr.is_bias), .wr_row(pwr.row),
    .wr_col(pwr.col), .wr_data(pwr.data));

  rinngs_dense #(.N_IN(L2_OUT), .N_OUT(L3_OUT), .LANES(L3_LANES)) u_l3 (
    .clk, .rst_n, .start(done2), .in_vec(h2), .busy(busy3), .done(done3), .out_vec(scores),
    .wr_en(pwr.en && pwr.layer == LAYER3), .wr_bias(pwr.is_bias), .wr_row(pwr.row),
    .wr_col(pwr.col), .wr_data(pwr.data));

  rinngs_argmax #(.N(L3_OUT)) u_argmax (.scores(scores), .label(label));

  assign out_valid = done3;

  // A layer is started only when it is idle.
  a_l1_free: assert property (@(posedge clk) disable iff (!rst_n) accept |-> !busy1);
  a_l2_free: assert property (@(posedge clk) disable iff (!rst_n) done1 |-> !busy2);
  a_l3_free: assert property (@(posedge clk) disable iff (!rst_n) done2 |-> !busy3);

  // Each layer must finish within one event interval for the pipeline to hold.
  initial begin
    assert (S1 + 1 <= EV_II && S2 + 1 <= EV_II && S3 + 1 <= EV_II)
      else $error("rinngs: a layer takes longer than the event interval");
  end

endmodule
