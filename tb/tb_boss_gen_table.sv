// tb_boss_gen_table -- random operations on the generation tables.
// Two instances: the default one-bit table and a three-bit one, where increment
// and decrement differ. Each is compared every cycle with a reference model.
module tb_boss_gen_table;
  import boss_pkg::*;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  cnt_op_e [NC-1:0] op;
  logic [NC-1:0][0:0] val1;
  logic [NC-1:0][2:0] val3;
  int m1 [NC], m3 [NC];
  int checks = 0, failures = 0;

  boss_gen_table #(.N_CH(NC))       dut1 (.clk, .rst_n, .op, .val(val1));
  boss_gen_table #(.N_CH(NC), .W(3)) dut3 (.clk, .rst_n, .op, .val(val3));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = '{default: CNT_HOLD};
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (m1[c]) begin m1[c] = 0; m3[c] = 0; end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (val1[c] != 1'(m1[c]) || val3[c] != 3'(m3[c])) begin
          failures++;
          $display("FAIL t=%0d ch=%0d got %0d/%0d want %0d/%0d", t, c, val1[c], val3[c], m1[c] & 1, m3[c] & 7);
        end
      end
      for (int c = 0; c < NC; c++) begin
        case ($urandom_range(0, 9))
          0, 1, 2, 3: op[c] = CNT_INC;
          4, 5, 6:    op[c] = CNT_DEC;
          7:          op[c] = CNT_RST;
          default:    op[c] = CNT_HOLD;
        endcase
        case (op[c])
          CNT_INC: begin m1[c] = (m1[c] + 1) & 1; m3[c] = (m3[c] + 1) & 7; end
          CNT_DEC: begin m1[c] = (m1[c] + 1) & 1; m3[c] = (m3[c] + 7) & 7; end
          CNT_RST: begin m1[c] = 0; m3[c] = 0; end
          default: ;
        endcase
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
