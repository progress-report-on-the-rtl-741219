// l0tp_downscaler: per-mask programmable downscaling.
//
// Each mask has a counter. On every valid match vector, a mask that matched
// advances its counter; when the count reaches its factor D the mask fires and
// the counter restarts. So with D = 1 every match fires, with D = 100 the
// 100th, 200th, ... match fires. D = 0 keeps the mask from firing. Writing a
// new factor does not reset the counter; a count already at or above a
// lowered D fires on the next match.
//
// Timing: fire/fire_valid are registered, one cycle after match/match_valid.
// Downscaling per mask follows the published trigger processor; the counter
// phase (first fire on the D-th match) and the meaning of D = 0 are this
// design's choices.
module l0tp_downscaler
  import l0tp_pkg::*;
#(
  parameter int unsigned NMASKS = N_MASKS,
  parameter int unsigned DSW    = DS_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              match_valid,
  input  logic [NMASKS-1:0] match,
  input  logic [DSW-1:0]    ds_factor [NMASKS],
  output logic              fire_valid,
  output logic [NMASKS-1:0] fire
);

  logic [DSW-1:0] cnt [NMASKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fire_valid <= 1'b0;
      fire       <= '0;
      for (int m = 0; m < NMASKS; m++) cnt[m] <= '0;
    end else begin
      fire_valid <= match_valid;
      fire       <= '0;
      if (match_valid) begin
        for (int m = 0; m < NMASKS; m++) begin
          if (match[m] && ds_factor[m] != '0) begin
            if (cnt[m] + 1'b1 >= ds_factor[m]) begin
              fire[m] <= 1'b1;
              cnt[m]  <= '0;
            end else begin
              cnt[m] <= cnt[m] + 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
