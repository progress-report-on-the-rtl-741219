// tb_rinngs_normalizer: checks every channel 0..1951 (and a few beyond) against
// floor(c * 1024 / 1952), and that empty slots give 0.
module tb_rinngs_normalizer;
  import rinngs_pkg::*;
  import rinngs_model_pkg::*;

  hit_t hits [N_HITS];
  act_t x    [N_HITS];
  int checks = 0, failures = 0;

  rinngs_normalizer dut (.hits(hits), .x(x));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int base = 0; base < 2048; base += N_HITS) begin
      for (int i = 0; i < N_HITS; i++) begin
        hits[i].channel = CH_W'(base + i);
        hits[i].valid   = ((base + i) % 7) != 3;
      end
      #1;
      for (int i = 0; i < N_HITS; i++) begin
        longint exp_v;
        exp_v = norm(base + i, hits[i].valid);
        checks++;
        if (longint'(x[i]) != exp_v) begin
          failures++;
          if (failures < 10) $display("ch %0d valid %0d: got %0d exp %0d", base + i, hits[i].valid, x[i], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
