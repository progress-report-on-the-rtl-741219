// tb_l0tp_core: configures the trigger processor through its register port
// (required bits, downscaling factors, enables), then sends random primitive
// slots. The trigger word of each slot (fired masks, matched masks,
// timestamp) is compared one cycle later with a model of masks plus
// per-mask downscaling. Reconfigures once mid-run.
module tb_l0tp_core;
  import l0tp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg = '0;
  logic slot_valid = 0;
  logic [TS_W-1:0] slot_ts = '0;
  prim_t prim [N_SRC];
  logic [N_SRC-1:0] prim_valid = '0;
  logic trig_valid;
  logic [N_MASKS-1:0] trig_masks, trig_matched;
  logic [TS_W-1:0] trig_ts;
  int checks = 0, failures = 0, n_trig = 0, n_suppressed = 0;

  // model state
  prim_t req [N_MASKS][N_SRC];
  int    ds  [N_MASKS];
  bit    en  [N_MASKS];
  int    cnt [N_MASKS];

  l0tp_core dut (.clk, .rst_n, .cfg, .slot_valid, .slot_ts, .prim, .prim_valid,
                 .trig_valid, .trig_masks, .trig_matched, .trig_ts);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cw(cfg_kind_e k, int m, int s, int d);
    @(negedge clk);
    cfg.en = 1; cfg.kind = k; cfg.mask = 8'(m); cfg.src = 8'(s); cfg.data = 32'(d);
    @(negedge clk);
    cfg.en = 0;
  endtask

  task automatic configure();
    for (int m = 0; m < N_MASKS; m++) begin
      en[m] = ($urandom_range(0, 3) != 0);
      ds[m] = (m % 4 == 0) ? 1 : (m % 4 == 1) ? 0 : $urandom_range(2, 5);
      for (int s = 0; s < N_SRC; s++) begin
        req[m][s] = ($urandom_range(0, 3) == 0) ? prim_t'(1 << $urandom_range(0, 3)) : '0;
        cw(CFG_REQ, m, s, int'(req[m][s]));
      end
      cw(CFG_DS, m, 0, ds[m]);
      cw(CFG_ENABLE, m, 0, int'(en[m]));
    end
  endtask

  task automatic run(int n);
    for (int t = 0; t < n; t++) begin
      logic [N_MASKS-1:0] mexp, fexp;
      @(negedge clk);
      slot_valid = ($urandom_range(0, 7) != 0);
      slot_ts = $urandom;
      for (int s = 0; s < N_SRC; s++) begin
        prim[s] = prim_t'($urandom_range(0, 15));
        prim_valid[s] = ($urandom_range(0, 7) != 0);
      end
      mexp = '0; fexp = '0;
      for (int m = 0; m < N_MASKS; m++) begin
        bit ok;
        ok = slot_valid && en[m];
        for (int s = 0; s < N_SRC; s++)
          if (req[m][s] != 0 && !(prim_valid[s] && (prim[s] & req[m][s]) == req[m][s])) ok = 0;
        mexp[m] = ok;
        if (ok && ds[m] != 0) begin
          cnt[m]++;
          if (cnt[m] == ds[m]) begin fexp[m] = 1; cnt[m] = 0; end
        end
        if (ok && !fexp[m]) n_suppressed++;
      end
      @(posedge clk); #1;
      checks++;
      if (trig_valid != (fexp != 0)) begin
        failures++; if (failures < 10) $display("t %0d trig_valid %0d exp %0d", t, trig_valid, fexp != 0);
      end
      if (slot_valid) begin
        checks++;
        if (trig_masks != fexp || trig_matched != mexp || (fexp != 0 && trig_ts != slot_ts)) begin
          failures++;
          if (failures < 10) $display("t %0d masks %h/%h matched %h/%h", t, trig_masks, fexp, trig_matched, mexp);
        end
      end
      n_trig += trig_valid;
    end
    @(negedge clk); slot_valid = 0;
  endtask

  initial begin
    for (int m = 0; m < N_MASKS; m++) cnt[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    configure();
    run(1500);
    // new configuration; the downscaling counters keep their counts
    configure();
    for (int m = 0; m < N_MASKS; m++) if (ds[m] != 0 && cnt[m] >= ds[m]) cnt[m] = ds[m] - 1;
    run(1500);
    checks++;
    if (n_trig == 0 || n_suppressed == 0) failures++;
    $display("triggers %0d, matches held back by downscaling or D=0: %0d", n_trig, n_suppressed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
