// rinngs_normalizer: hit list -> network input vector.
//
// Each valid hit's PMT channel number c becomes x = floor(c * 2^DFRAC / N_CHANNELS),
// i.e. c / N_CHANNELS in the activation fixed-point format (a value in [0,1)).
// Empty slots (valid = 0) give 0. The constant division is done as a multiply
// by RECIP = ceil(2^SH / N_CHANNELS) and a right shift by SH; with SH = 32 the
// result equals the exact floor for every channel below 2^CH_W.
//
// Purely combinational; the first dense layer registers the result.
// Dividing by the channel count follows the published network; the floor
// rounding and the zero for empty slots are this design's choices.
module rinngs_normalizer
  import rinngs_pkg::*;
#(
  parameter int unsigned NH        = N_HITS,
  parameter int unsigned NCHANNELS = N_CHANNELS
) (
  input  hit_t hits [NH],
  output act_t x    [NH]
);

  localparam int unsigned SH = 32;
  localparam longint unsigned RECIP = ((64'd1 << SH) + 64'(NCHANNELS) - 64'd1) / 64'(NCHANNELS);

  always_comb begin
    for (int i = 0; i < NH; i++) begin
      logic [63:0] num;
      logic [63:0] prod;
      num  = 64'(hits[i].channel) << DFRAC;
      prod = num * RECIP;
      x[i] = hits[i].valid ? act_t'(prod >> SH) : '0;
    end
  end

endmodule
