// tb_l0tp_downscaler: random match streams with per-mask factors 0 (off), 1,
// and 2..7; the fire vector, one cycle later, is compared with a counting
// model, and the number of fires per mask must be floor(matches / D).
module tb_l0tp_downscaler;
  import l0tp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic match_valid = 0, fire_valid;
  logic [N_MASKS-1:0] match = '0, fire;
  logic [DS_W-1:0] ds_factor [N_MASKS];
  int checks = 0, failures = 0;
  int mcount [N_MASKS], fcount [N_MASKS], model_cnt [N_MASKS];
  logic [N_MASKS-1:0] exp_fire;
  logic exp_valid;

  l0tp_downscaler dut (.clk, .rst_n, .match_valid, .match, .ds_factor, .fire_valid, .fire);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < N_MASKS; m++) begin
      ds_factor[m] = (m == 0) ? '0 : (m == 1) ? DS_W'(1) : DS_W'(2 + (m % 6));
      mcount[m] = 0; fcount[m] = 0; model_cnt[m] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      match_valid = ($urandom_range(0, 4) != 0);
      match = N_MASKS'($urandom);
      // model, for the output seen after the next edge
      exp_valid = match_valid;
      exp_fire = '0;
      if (match_valid)
        for (int m = 0; m < N_MASKS; m++)
          if (match[m] && ds_factor[m] != 0) begin
            mcount[m]++;
            model_cnt[m]++;
            if (model_cnt[m] == int'(ds_factor[m])) begin exp_fire[m] = 1; model_cnt[m] = 0; end
          end
      @(posedge clk); #1;
      checks++;
      if (fire_valid != exp_valid || fire != exp_fire) begin
        failures++;
        if (failures < 10) $display("t %0d fire %h exp %h", t, fire, exp_fire);
      end
      for (int m = 0; m < N_MASKS; m++) fcount[m] += fire[m];
    end
    for (int m = 0; m < N_MASKS; m++) begin
      checks++;
      if (ds_factor[m] == 0 ? fcount[m] != 0 : fcount[m] != mcount[m] / int'(ds_factor[m])) begin
        failures++;
        $display("mask %0d: %0d fires for %0d matches, D=%0d", m, fcount[m], mcount[m], ds_factor[m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
