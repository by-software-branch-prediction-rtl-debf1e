// tb_boss_iter_stack -- random push / pop / reset on the iteration stack, for the
// default depth of one and for depth three, against a queue model (a push onto a
// full stack drops the oldest entry, a pop of an empty stack reads 0).
module tb_boss_iter_stack;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] push, pop, rst_ch;
  logic [NC-1:0][7:0] push_val, top1, top3;
  int q1 [NC][$], q3 [NC][$];
  int checks = 0, failures = 0;

  boss_iter_stack               dut1 (.clk, .rst_n, .push, .push_val, .pop, .rst_ch, .top(top1));
  boss_iter_stack #(.DEPTH(3))  dut3 (.clk, .rst_n, .push, .push_val, .pop, .rst_ch, .top(top3));

  always #5 clk = ~clk;

  function automatic int peek(ref int q[$]);
    return (q.size() == 0) ? 0 : q[0];
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = '0; pop = '0; rst_ch = '0; push_val = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (top1[c] != 8'(peek(q1[c])) || top3[c] != 8'(peek(q3[c]))) begin
          failures++;
          $display("FAIL t=%0d ch=%0d top %0d/%0d want %0d/%0d", t, c, top1[c], top3[c],
                   peek(q1[c]), peek(q3[c]));
        end
      end
      for (int c = 0; c < NC; c++) begin
        automatic int r = $urandom_range(0, 19);
        push_val[c] = 8'($urandom);
        rst_ch[c] = (r == 0);
        pop[c]    = (r >= 1 && r <= 6);
        push[c]   = (r >= 5 && r <= 13);     // r = 5, 6: push and pop together, pop wins
        if (rst_ch[c]) begin
          q1[c].delete(); q3[c].delete();
        end else if (pop[c]) begin
          if (q1[c].size() != 0) void'(q1[c].pop_front());
          if (q3[c].size() != 0) void'(q3[c].pop_front());
        end else if (push[c]) begin
          q1[c].push_front(int'(push_val[c]));
          q3[c].push_front(int'(push_val[c]));
          if (q1[c].size() > 1) void'(q1[c].pop_back());
          if (q3[c].size() > 3) void'(q3[c].pop_back());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
