// tb_rinngs_argmax: random score vectors, forced ties and negative values,
// compared with a first-maximum scan.
module tb_rinngs_argmax;
  import rinngs_pkg::*;

  act_t   scores [4];
  logic [1:0] label;
  int checks = 0, failures = 0;

  rinngs_argmax dut (.scores(scores), .label(label));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int best;
      for (int i = 0; i < 4; i++) begin
        case (t % 4)
          0: scores[i] = act_t'($urandom);
          1: scores[i] = act_t'($urandom_range(0, 3));          // many ties
          2: scores[i] = -act_t'($urandom_range(1, 1000));      // all negative
          default: scores[i] = act_t'($urandom_range(0, 131071));
        endcase
      end
      #1;
      best = 0;
      for (int i = 1; i < 4; i++) if ($signed(scores[i]) > $signed(scores[best])) best = i;
      checks++;
      if (int'(label) != best) begin
        failures++;
        if (failures < 10) $display("scores %0d %0d %0d %0d: got %0d exp %0d",
                                    scores[0], scores[1], scores[2], scores[3], label, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
