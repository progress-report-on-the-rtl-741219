// tb_l0tp_mask_matcher: random masks (sparse required bits, some sources
// don't-care) and primitive slots built to satisfy a random mask or not;
// each match bit is compared with a bit-by-bit model. Counts how many
// matches and non-matches were seen; both must occur.
module tb_l0tp_mask_matcher;
  import l0tp_pkg::*;

  logic slot_valid;
  prim_t prim [N_SRC];
  logic [N_SRC-1:0] prim_valid;
  logic [N_MASKS-1:0] mask_en, match;
  prim_t mask_req [N_MASKS][N_SRC];
  int checks = 0, failures = 0, n_match = 0, n_nomatch = 0;

  l0tp_mask_matcher dut (.slot_valid, .prim, .prim_valid, .mask_en, .mask_req, .match);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit model(int m);
    if (!slot_valid || !mask_en[m]) return 0;
    for (int s = 0; s < N_SRC; s++)
      for (int b = 0; b < PRIM_W; b++)
        if (mask_req[m][s][b] && !(prim_valid[s] && prim[s][b])) return 0;
    return 1;
  endfunction

  initial begin
    for (int round = 0; round < 50; round++) begin
      mask_en = N_MASKS'($urandom);
      for (int m = 0; m < N_MASKS; m++)
        for (int s = 0; s < N_SRC; s++)
          mask_req[m][s] = ($urandom_range(0, 2) == 0) ? prim_t'(1 << $urandom_range(0, PRIM_W - 1)) : '0;
      for (int t = 0; t < 40; t++) begin
        int target;
        target = $urandom_range(0, N_MASKS - 1);
        slot_valid = ($urandom_range(0, 9) != 0);
        for (int s = 0; s < N_SRC; s++) begin
          prim[s] = prim_t'($urandom) & prim_t'($urandom);
          prim_valid[s] = ($urandom_range(0, 5) != 0);
          if (t % 2 == 0) begin  // satisfy the target mask
            prim[s] |= mask_req[target][s];
            if (mask_req[target][s] != '0) prim_valid[s] = 1'b1;
          end
        end
        #1;
        for (int m = 0; m < N_MASKS; m++) begin
          checks++;
          if (match[m] != model(m)) begin
            failures++;
            if (failures < 10) $display("round %0d t %0d mask %0d: got %0d", round, t, m, match[m]);
          end
          if (model(m)) n_match++; else n_nomatch++;
        end
      end
    end
    checks++;
    if (n_match == 0 || n_nomatch == 0) failures++;
    $display("matches %0d non-matches %0d", n_match, n_nomatch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
