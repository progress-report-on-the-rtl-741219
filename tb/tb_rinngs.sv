// tb_rinngs: the whole RiNNgs network at its default size (32-slot hit list,
// 64-16-4 layers). Random trained-like parameters are loaded through the
// write port, then random hit lists are offered back to back. Checks:
//   - label and the four scores equal the reference model,
//   - each result comes exactly 20 cycles after its event was accepted,
//   - events are accepted exactly 10 cycles apart when offered continuously
//     (in_ready low for the 9 cycles in between).
module tb_rinngs;
  import rinngs_pkg::*;
  import rinngs_model_pkg::*;

  localparam int LAT = 20, EII = 10, NEV = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid;
  hit_t hits [N_HITS];
  label_t label;
  act_t scores [L3_OUT];
  param_wr_t pwr = '0;
  int checks = 0, failures = 0;
  longint cycle = 0;

  wmat_t w1, w2, w3;
  bvec_t b1, b2, b3;

  rinngs dut (.clk, .rst_n, .in_valid, .in_ready, .hits, .out_valid, .label, .scores, .pwr);

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(layer_e layer, bit bias, int row, int col, int data);
    @(negedge clk);
    pwr.en = 1; pwr.layer = layer; pwr.is_bias = bias; pwr.row = IDX_W'(row);
    pwr.col = IDX_W'(col); pwr.data = BW'(data);
  endtask

  task automatic load_all();
    for (int j = 0; j < 64; j++) for (int i = 0; i < 64; i++) begin
      w1[j][i] = $signed($urandom_range(0, 100)) - 40;
      w2[j][i] = $signed($urandom_range(0, 100)) - 50;
      w3[j][i] = $signed($urandom_range(0, 127)) - 64;
    end
    for (int j = 0; j < 64; j++) begin
      b1[j] = $signed($urandom_range(0, 511)) - 256;
      b2[j] = $signed($urandom_range(0, 511)) - 256;
      b3[j] = $signed($urandom_range(0, 511)) - 256;
    end
    for (int j = 0; j < L1_OUT; j++) begin
      for (int i = 0; i < N_HITS; i++) wr(LAYER1, 0, j, i, w1[j][i]);
      wr(LAYER1, 1, j, 0, b1[j]);
    end
    for (int j = 0; j < L2_OUT; j++) begin
      for (int i = 0; i < L1_OUT; i++) wr(LAYER2, 0, j, i, w2[j][i]);
      wr(LAYER2, 1, j, 0, b2[j]);
    end
    for (int j = 0; j < L3_OUT; j++) begin
      for (int i = 0; i < L2_OUT; i++) wr(LAYER3, 0, j, i, w3[j][i]);
      wr(LAYER3, 1, j, 0, b3[j]);
    end
    @(negedge clk); pwr = '0;
  endtask

  // expected results, in order
  typedef struct { longint acc_cycle; int lab; longint s [4]; } exp_t;
  exp_t expq [$];
  int label_count [4];

  task automatic new_event();
    vec_t x, h1, h2, o;
    exp_t e;
    int nh;
    nh = $urandom_range(0, N_HITS);
    for (int i = 0; i < 64; i++) x[i] = 0;
    for (int i = 0; i < N_HITS; i++) begin
      hits[i].valid   = (i < nh);
      hits[i].channel = CH_W'($urandom_range(0, N_CHANNELS - 1));
      x[i] = norm(int'(hits[i].channel), hits[i].valid);
    end
    dense(x, w1, b1, N_HITS, L1_OUT, 1'b1, h1);
    dense(h1, w2, b2, L1_OUT, L2_OUT, 1'b1, h2);
    dense(h2, w3, b3, L2_OUT, L3_OUT, 1'b1, o);
    e.lab = argmax(o, 4);
    for (int k = 0; k < 4; k++) e.s[k] = o[k];
    e.acc_cycle = -1;
    expq.push_back(e);
  endtask

  // accept monitor: stamp the pending event with its acceptance cycle
  int pending_idx = 0;
  longint last_accept = -1;
  int accepts = 0;
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      if (last_accept >= 0) begin
        checks++;
        if (cycle - last_accept != EII) begin
          failures++; $display("accept interval %0d, exp %0d", cycle - last_accept, EII);
        end
      end
      last_accept = cycle;
      accepts++;
    end
  end

  // result monitor
  int results = 0;
  longint acc_cycles [$];
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) acc_cycles.push_back(cycle);
    if (rst_n && out_valid) begin
      exp_t e;
      longint ac;
      e = expq.pop_front();
      ac = acc_cycles.pop_front();
      results++;
      checks++;
      if (cycle - ac != LAT) begin failures++; $display("latency %0d exp %0d", cycle - ac, LAT); end
      checks++;
      if (int'(label) != e.lab) begin failures++; $display("label %0d exp %0d", label, e.lab); end
      label_count[label]++;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (longint'(scores[k]) != e.s[k]) begin
          failures++;
          if (failures < 10) $display("score[%0d] %0d exp %0d", k, scores[k], e.s[k]);
        end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_all();
    // continuous offer
    new_event();
    @(negedge clk); in_valid = 1;
    for (int n = 1; n < NEV; n++) begin
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      // accepted at this edge; present the next event
      @(negedge clk);
      new_event();
      if (n % 50 == 0) begin  // a gap in the stream
        in_valid = 0;
        repeat (13) @(negedge clk);
        in_valid = 1;
        last_accept = -1;
      end
    end
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (results != NEV) begin failures++; $display("results %0d exp %0d", results, NEV); end
    $display("labels seen: %0d %0d %0d %0d", label_count[0], label_count[1], label_count[2], label_count[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
