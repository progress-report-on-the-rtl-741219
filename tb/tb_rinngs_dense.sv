// tb_rinngs_dense: two layers, the default 32x64 ReLU layer (4 lanes, 8 steps)
// and a 10x5 linear layer with 3 lanes (padding, negative outputs). Random
// weights, biases and inputs, some large enough to saturate; every output is
// compared with the reference model and the start-to-done latency must be
// STEPS+1 cycles. Back-to-back starts are issued as soon as done arrives.
module tb_rinngs_dense;
  import rinngs_pkg::*;
  import rinngs_model_pkg::*;

  localparam int NA = 32, MA = 64, LA = 4, SA = 8;
  localparam int NB = 10, MB = 5,  LB = 3, SB = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start_a = 0, start_b = 0, busy_a, busy_b, done_a, done_b;
  act_t in_a [NA], in_b [NB], out_a [MA], out_b [MB];
  logic wr_en = 0, wr_bias = 0;
  logic [IDX_W-1:0] wr_row = 0, wr_col = 0;
  logic [BW-1:0] wr_data = 0;
  int checks = 0, failures = 0;

  wmat_t wa, wb;
  bvec_t ba, bb;

  rinngs_dense #(.N_IN(NA), .N_OUT(MA), .LANES(LA)) dut_a (
    .clk, .rst_n, .start(start_a), .in_vec(in_a), .busy(busy_a), .done(done_a), .out_vec(out_a),
    .wr_en, .wr_bias, .wr_row, .wr_col, .wr_data);
  rinngs_dense #(.N_IN(NB), .N_OUT(MB), .LANES(LB), .RELU(1'b0)) dut_b (
    .clk, .rst_n, .start(start_b), .in_vec(in_b), .busy(busy_b), .done(done_b), .out_vec(out_b),
    .wr_en, .wr_bias, .wr_row, .wr_col, .wr_data);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_p(bit bias, int row, int col, int data);
    @(negedge clk);
    wr_en = 1; wr_bias = bias; wr_row = IDX_W'(row); wr_col = IDX_W'(col); wr_data = BW'(data);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic load_params(int wscale);
    for (int j = 0; j < 64; j++) begin
      for (int i = 0; i < 64; i++) begin
        wa[j][i] = $signed($urandom_range(0, 2*wscale)) - wscale;
        if (wa[j][i] > 63) wa[j][i] = 63;
        wb[j][i] = $signed($urandom_range(0, 127)) - 64;
      end
      ba[j] = $signed($urandom_range(0, 511)) - 256;
      bb[j] = $signed($urandom_range(0, 511)) - 256;
    end
    // Both DUTs share the port; layer A takes rows < 64, B rows < 5, so load
    // B's values last for those rows by writing B where A's row/col is shared.
    for (int j = 0; j < MA; j++) begin
      for (int i = 0; i < NA; i++) begin
        if (j < MB && i < NB) wa[j][i] = wb[j][i];
        write_p(0, j, i, wa[j][i]);
      end
      if (j < MB) ba[j] = bb[j];
      write_p(1, j, 0, ba[j]);
    end
  endtask

  task automatic run_a(int xmax, int trials);
    vec_t x, y;
    for (int t = 0; t < trials; t++) begin
      int lat;
      for (int i = 0; i < 64; i++) x[i] = 0;
      for (int i = 0; i < NA; i++) begin
        x[i] = $signed($urandom_range(0, 2*xmax)) - xmax;
        if (t % 3 == 0) x[i] = $urandom_range(0, xmax);
        in_a[i] = act_t'(x[i]);
      end
      dense(x, wa, ba, NA, MA, 1'b1, y);
      @(negedge clk); start_a = 1;
      @(negedge clk); start_a = 0;
      lat = 1;
      while (!done_a && lat < 50) begin @(negedge clk); lat++; end
      checks++;
      if (lat != SA + 1) begin failures++; $display("A latency %0d exp %0d", lat, SA + 1); end
      for (int j = 0; j < MA; j++) begin
        checks++;
        if (longint'(out_a[j]) != y[j]) begin
          failures++;
          if (failures < 10) $display("A t%0d out[%0d]=%0d exp %0d", t, j, out_a[j], y[j]);
        end
      end
    end
  endtask

  task automatic run_b(int trials);
    vec_t x, y;
    for (int t = 0; t < trials; t++) begin
      int lat;
      for (int i = 0; i < 64; i++) x[i] = 0;
      for (int i = 0; i < NB; i++) begin
        x[i] = $signed($urandom_range(0, 4000)) - 2000;
        in_b[i] = act_t'(x[i]);
      end
      dense(x, wb, bb, NB, MB, 1'b0, y);
      @(negedge clk); start_b = 1;
      @(negedge clk); start_b = 0;
      lat = 1;
      while (!done_b && lat < 50) begin @(negedge clk); lat++; end
      checks++;
      if (lat != SB + 1) begin failures++; $display("B latency %0d exp %0d", lat, SB + 1); end
      for (int j = 0; j < MB; j++) begin
        checks++;
        if (longint'(out_b[j]) != y[j]) begin
          failures++;
          if (failures < 10) $display("B t%0d out[%0d]=%0d exp %0d", t, j, out_b[j], y[j]);
        end
      end
    end
  endtask

  int sat_seen, neg_seen;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_params(63);
    run_a(1023, 20);     // normal range
    run_a(131071, 10);   // large inputs: saturation
    sat_seen = 0;
    for (int j = 0; j < MA; j++) if (out_a[j] == act_t'(131071)) sat_seen++;
    run_b(20);
    neg_seen = 0;
    for (int j = 0; j < MB; j++) if (out_b[j] < 0) neg_seen++;
    load_params(8);
    run_a(1023, 10);
    run_b(10);
    $display("saturated outputs in last large trial: %0d", sat_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
