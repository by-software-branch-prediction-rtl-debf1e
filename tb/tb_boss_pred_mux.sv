// tb_boss_pred_mux -- exhaustive check of the prediction override multiplexer:
// the BOSS outcome must win exactly when the table hits.
module tb_boss_pred_mux;
  logic conv_taken, boss_hit, boss_taken, pred_taken;
  int checks = 0, failures = 0;

  boss_pred_mux dut (.*);

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {conv_taken, boss_hit, boss_taken} = 3'(v);
      #1;
      checks++;
      if (pred_taken !== (boss_hit ? boss_taken : conv_taken)) begin
        failures++;
        $display("FAIL conv=%0b hit=%0b boss=%0b pred=%0b", conv_taken, boss_hit, boss_taken, pred_taken);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
