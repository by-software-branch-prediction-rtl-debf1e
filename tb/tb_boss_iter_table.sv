// tb_boss_iter_table -- random increment / decrement / reset / reload operations
// on the consumer iteration table, compared every cycle with a reference model
// (8-bit values that wrap at 256).
module tb_boss_iter_table;
  import boss_pkg::*;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  cnt_op_e [NC-1:0] op;
  logic [NC-1:0][7:0] load_val, val;
  int m [NC];
  int checks = 0, failures = 0;

  boss_iter_table dut (.clk, .rst_n, .op, .load_val, .val);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = '{default: CNT_HOLD};
    load_val = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (m[c]) m[c] = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (val[c] != 8'(m[c])) begin
          failures++;
          $display("FAIL t=%0d ch=%0d got %0d want %0d", t, c, val[c], m[c]);
        end
      end
      for (int c = 0; c < NC; c++) begin
        load_val[c] = 8'($urandom);
        case ($urandom_range(0, 19))
          0, 1, 2, 3, 4, 5, 6, 7, 8: op[c] = CNT_INC;   // mostly counting up, so it wraps
          9, 10, 11:  op[c] = CNT_DEC;
          12:         op[c] = CNT_RST;
          13:         op[c] = CNT_LOAD;
          default:    op[c] = CNT_HOLD;
        endcase
        case (op[c])
          CNT_INC:  m[c] = (m[c] + 1) % 256;
          CNT_DEC:  m[c] = (m[c] + 255) % 256;
          CNT_RST:  m[c] = 0;
          CNT_LOAD: m[c] = int'(load_val[c]);
          default: ;
        endcase
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
