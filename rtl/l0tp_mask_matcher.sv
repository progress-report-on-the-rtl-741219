// l0tp_mask_matcher: trigger-mask coincidence check for one time slot.
//
// Each of N_SRC sources (detectors, plus the RiNNgs ring count) presents a
// primitive word and a valid bit per slot. A mask lists, per source, the
// primitive bits it requires. Mask m matches when it is enabled, the slot is
// valid, and for every source with a non-zero requirement the source is valid
// and has all required bits set; a source with no required bits is don't-care.
// Combinational.
//
// Coincidences of primitives under user-defined masks follow the published
// trigger processor; the required-bits encoding and the don't-care rule are
// this design's choices (vetoes and timing windows are not modelled).
module l0tp_mask_matcher
  import l0tp_pkg::*;
#(
  parameter int unsigned NSRC   = N_SRC,
  parameter int unsigned NMASKS = N_MASKS
) (
  input  logic              slot_valid,
  input  prim_t             prim       [NSRC],
  input  logic [NSRC-1:0]   prim_valid,
  input  logic [NMASKS-1:0] mask_en,
  input  prim_t             mask_req   [NMASKS][NSRC],
  output logic [NMASKS-1:0] match
);

  always_comb begin
    for (int m = 0; m < NMASKS; m++) begin
      logic ok;
      ok = slot_valid && mask_en[m];
      for (int s = 0; s < NSRC; s++) begin
        if (mask_req[m][s] != '0) begin
          if (!prim_valid[s] || ((prim[s] & mask_req[m][s]) != mask_req[m][s])) ok = 1'b0;
        end
      end
      match[m] = ok;
    end
  end

endmodule
