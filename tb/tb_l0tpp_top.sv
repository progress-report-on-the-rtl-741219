// tb_l0tpp_top: end-to-end test of the trigger processor with the RiNNgs ring
// counter, at the default sizes (32-slot hit lists, 64-16-4 network, 8
// detector links, 16 masks).
//
// The network weights are loaded through nn_wr and the trigger masks through
// cfg. Time slots (hit list + 8 detector primitives + timestamp) are offered
// continuously, so the 10-cycle event interval stalls the source. Phase 1
// forces each ring-count label in turn (output-layer weights 0, one positive
// bias); phase 2 uses random weights. For every accepted slot the expected
// trigger word is computed from a reference model of the network, the masks
// and the downscalers, and checked 21 cycles later (20 network + 1 trigger).
// Each mechanism must occur at least once: source stall, each of the four
// labels, mask match, downscale hold-back, disabled (D=0) mask, trigger,
// trigger with several masks.
module tb_l0tpp_top;
  import rinngs_pkg::*;
  import l0tp_pkg::*;
  import rinngs_model_pkg::*;

  localparam int TRIG_LAT = 21;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ev_valid = 0, ev_ready;
  hit_t ev_hits [N_HITS];
  prim_t ev_prim [N_DET];
  logic [N_DET-1:0] ev_prim_valid = '0;
  logic [TS_W-1:0] ev_ts = '0;
  param_wr_t nn_wr = '0;
  cfg_wr_t cfg = '0;
  logic trig_valid, nn_valid;
  logic [N_MASKS-1:0] trig_masks, trig_matched;
  logic [TS_W-1:0] trig_ts;
  label_t nn_label;
  act_t nn_scores [L3_OUT];

  l0tpp_top dut (.clk, .rst_n, .ev_valid, .ev_ready, .ev_hits, .ev_prim, .ev_prim_valid, .ev_ts,
                 .nn_wr, .cfg, .trig_valid, .trig_masks, .trig_matched, .trig_ts,
                 .nn_valid, .nn_label, .nn_scores);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference state ----------------
  wmat_t w1, w2, w3;
  bvec_t b1, b2, b3;
  prim_t req [N_MASKS][N_SRC];
  int    ds  [N_MASKS];
  bit    en  [N_MASKS];
  int    cnt [N_MASKS];

  // mechanism counters
  int n_stall = 0, n_match = 0, n_held = 0, n_off = 0, n_trig = 0, n_multi = 0;
  int n_label [4];

  task automatic nnw(layer_e layer, bit bias, int row, int col, int data);
    @(negedge clk);
    nn_wr.en = 1; nn_wr.layer = layer; nn_wr.is_bias = bias; nn_wr.row = IDX_W'(row);
    nn_wr.col = IDX_W'(col); nn_wr.data = BW'(data);
    @(negedge clk);
    nn_wr = '0;
  endtask

  task automatic cw(cfg_kind_e k, int m, int s, int d);
    @(negedge clk);
    cfg.en = 1; cfg.kind = k; cfg.mask = 8'(m); cfg.src = 8'(s); cfg.data = 32'(d);
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic load_net(bit forced);
    for (int j = 0; j < 64; j++) begin
      for (int i = 0; i < 64; i++) begin
        w1[j][i] = $signed($urandom_range(0, 100)) - 40;
        w2[j][i] = $signed($urandom_range(0, 100)) - 50;
        w3[j][i] = forced ? 0 : $signed($urandom_range(0, 127)) - 64;
      end
      b1[j] = $signed($urandom_range(0, 511)) - 256;
      b2[j] = $signed($urandom_range(0, 511)) - 256;
      b3[j] = $signed($urandom_range(0, 511)) - 256;
    end
    for (int j = 0; j < L1_OUT; j++) begin
      for (int i = 0; i < N_HITS; i++) nnw(LAYER1, 0, j, i, w1[j][i]);
      nnw(LAYER1, 1, j, 0, b1[j]);
    end
    for (int j = 0; j < L2_OUT; j++) begin
      for (int i = 0; i < L1_OUT; i++) nnw(LAYER2, 0, j, i, w2[j][i]);
      nnw(LAYER2, 1, j, 0, b2[j]);
    end
    for (int j = 0; j < L3_OUT; j++) begin
      for (int i = 0; i < L2_OUT; i++) nnw(LAYER3, 0, j, i, w3[j][i]);
      nnw(LAYER3, 1, j, 0, b3[j]);
    end
  endtask

  // Output-layer biases that make label k win whatever the hidden values.
  task automatic force_label(int k);
    for (int j = 0; j < 4; j++) begin
      b3[j] = (j == k) ? 200 : -100;
      nnw(LAYER3, 1, j, 0, b3[j]);
    end
  endtask

  task automatic set_mask(int m, bit e, int d, int s0, int bits0, int s1, int bits1);
    en[m] = e; ds[m] = d;
    for (int s = 0; s < N_SRC; s++) req[m][s] = '0;
    if (s0 >= 0) req[m][s0] = prim_t'(bits0);
    if (s1 >= 0) req[m][s1] = prim_t'(bits1);
    for (int s = 0; s < N_SRC; s++) cw(CFG_REQ, m, s, int'(req[m][s]));
    cw(CFG_DS, m, 0, d);
    cw(CFG_ENABLE, m, 0, int'(e));
  endtask

  localparam int NN = N_DET;  // source index of the ring-count primitive

  task automatic configure();
    for (int m = 0; m < N_MASKS; m++) begin en[m] = 0; ds[m] = 0; cnt[m] = 0;
      for (int s = 0; s < N_SRC; s++) req[m][s] = '0; end
    set_mask(0, 1, 1, NN, 'h4, 0, 'h1);     // >=2 rings and detector 0 bit 0
    set_mask(1, 1, 3, 1, 'h8, -1, 0);       // detector 1 bit 3, downscaled by 3
    set_mask(2, 1, 1, NN, 'h1, -1, 0);      // no ring
    set_mask(3, 1, 0, 2, 'h2, -1, 0);       // factor 0: never fires
    set_mask(4, 1, 2, NN, 'h8, 3, 'h20);    // 3+ rings and detector 3 bit 5, by 2
    set_mask(5, 0, 1, 4, 'h1, -1, 0);       // disabled
    set_mask(6, 1, 5, NN, 'h2, -1, 0);      // >=1 ring, downscaled by 5
  endtask

  // ---------------- stimulus ----------------
  task automatic randomize_slot();
    int nh;
    nh = $urandom_range(0, N_HITS);
    for (int i = 0; i < N_HITS; i++) begin
      ev_hits[i].valid   = (i < nh);
      ev_hits[i].channel = CH_W'($urandom_range(0, N_CHANNELS - 1));
    end
    for (int d = 0; d < N_DET; d++) begin
      ev_prim[d] = prim_t'($urandom_range(0, 63));
      ev_prim_valid[d] = ($urandom_range(0, 5) != 0);
    end
    ev_ts = $urandom;
  endtask

  task automatic stream(int n);
    randomize_slot();
    @(negedge clk); ev_valid = 1;
    for (int k = 0; k < n; k++) begin
      @(posedge clk);
      while (!ev_ready) @(posedge clk);
      @(negedge clk);
      randomize_slot();
    end
    ev_valid = 0;
    repeat (TRIG_LAT + 5) @(negedge clk);
  endtask

  // ---------------- checking ----------------
  typedef struct {
    longint due;
    logic [N_MASKS-1:0] fexp, mexp;
    logic [TS_W-1:0] ts;
    int lab;
    longint s [4];
  } exp_t;
  exp_t q [$];
  exp_t nnq [$];
  int n_slots = 0, n_checked = 0;

  function automatic exp_t predict();
    exp_t e;
    vec_t x, h1, h2, o;
    prim_t p [N_SRC];
    logic [N_SRC-1:0] pv;
    for (int i = 0; i < 64; i++) x[i] = 0;
    for (int i = 0; i < N_HITS; i++) x[i] = norm(int'(ev_hits[i].channel), ev_hits[i].valid);
    dense(x, w1, b1, N_HITS, L1_OUT, 1'b1, h1);
    dense(h1, w2, b2, L1_OUT, L2_OUT, 1'b1, h2);
    dense(h2, w3, b3, L2_OUT, L3_OUT, 1'b1, o);
    e.lab = argmax(o, 4);
    for (int k = 0; k < 4; k++) e.s[k] = o[k];
    for (int d = 0; d < N_DET; d++) begin p[d] = ev_prim[d]; pv[d] = ev_prim_valid[d]; end
    p[NN] = prim_t'({e.lab == 3, e.lab >= 2, e.lab >= 1, e.lab == 0});
    pv[NN] = 1'b1;
    e.fexp = '0; e.mexp = '0;
    for (int m = 0; m < N_MASKS; m++) begin
      bit ok;
      ok = en[m];
      for (int s = 0; s < N_SRC; s++)
        if (req[m][s] != 0 && !(pv[s] && (p[s] & req[m][s]) == req[m][s])) ok = 0;
      e.mexp[m] = ok;
      if (ok) begin
        n_match++;
        if (ds[m] == 0) n_off++;
        else begin
          cnt[m]++;
          if (cnt[m] == ds[m]) begin e.fexp[m] = 1; cnt[m] = 0; end
          else n_held++;
        end
      end
    end
    e.ts = ev_ts;
    e.due = cycle + longint'(TRIG_LAT);
    return e;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (ev_valid && !ev_ready) n_stall++;
      if (ev_valid && ev_ready) begin
        exp_t e;
        e = predict();
        q.push_back(e);
        nnq.push_back(e);
        n_slots++;
      end
      if (nn_valid) begin
        exp_t e;
        e = nnq.pop_front();
        n_label[nn_label]++;
        checks++;
        if (int'(nn_label) != e.lab) begin failures++; $display("nn label %0d exp %0d", nn_label, e.lab); end
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (longint'(nn_scores[k]) != e.s[k]) begin
            failures++;
            if (failures < 10) $display("nn score[%0d] %0d exp %0d", k, nn_scores[k], e.s[k]);
          end
        end
      end
      if (q.size() > 0 && q[0].due == cycle) begin
        exp_t e;
        e = q.pop_front();
        n_checked++;
        checks++;
        if (trig_valid != (e.fexp != 0)) begin
          failures++;
          if (failures < 10) $display("slot ts %h: trig_valid %0d exp %0d (label %0d)", e.ts, trig_valid, e.fexp != 0, e.lab);
        end
        if (e.fexp != 0) begin
          checks++;
          if (trig_masks != e.fexp || trig_matched != e.mexp || trig_ts != e.ts) begin
            failures++;
            if (failures < 10) $display("slot ts %h: masks %h/%h matched %h/%h ts %h", e.ts,
                                        trig_masks, e.fexp, trig_matched, e.mexp, trig_ts);
          end
          n_trig++;
          if ($countones(e.fexp) >= 2) n_multi++;
        end
      end else if (trig_valid) begin
        checks++; failures++;
        $display("unexpected trigger at cycle %0d", cycle);
      end
    end
  end

  initial begin
    for (int k = 0; k < 4; k++) n_label[k] = 0;
    for (int m = 0; m < N_MASKS; m++) cnt[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    configure();
    load_net(1'b1);
    for (int k = 0; k < 4; k++) begin
      force_label(k);
      stream(30);
    end
    load_net(1'b0);
    stream(150);
    checks++;
    if (n_checked != n_slots || q.size() != 0) begin
      failures++; $display("slots %0d checked %0d left %0d", n_slots, n_checked, q.size());
    end
    $display("slots %0d stalls %0d labels %0d/%0d/%0d/%0d matches %0d held %0d off %0d triggers %0d multi %0d",
             n_slots, n_stall, n_label[0], n_label[1], n_label[2], n_label[3], n_match, n_held, n_off,
             n_trig, n_multi);
    checks++; if (n_stall == 0) begin failures++; $display("no stall"); end
    for (int k = 0; k < 4; k++) begin
      checks++; if (n_label[k] == 0) begin failures++; $display("label %0d never produced", k); end
    end
    checks++; if (n_match == 0) begin failures++; $display("no match"); end
    checks++; if (n_held == 0) begin failures++; $display("no downscale hold-back"); end
    checks++; if (n_off == 0) begin failures++; $display("no D=0 match"); end
    checks++; if (n_trig == 0) begin failures++; $display("no trigger"); end
    checks++; if (n_multi == 0) begin failures++; $display("no multi-mask trigger"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
