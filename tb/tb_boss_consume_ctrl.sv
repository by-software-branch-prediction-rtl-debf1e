// tb_boss_consume_ctrl -- random event combinations into the consumption index
// update logic, checked against the event table of the design:
//   branch fetch -> lookup + iter# INC; branch squash -> iter# DEC;
//   Loop-End fetch -> push iter#, iter# RST, cons gen# INC;
//   Loop-End squash -> pop into iter#, cons gen# DEC; Loop-End commit -> prod gen# INC;
//   branch commit -> removal with the carried tag; open/close -> reset everything.
module tb_boss_consume_ctrl;
  import boss_pkg::*;
  localparam int NC = 4;
  logic f_br_hit, f_end_hit, s_br_hit, s_end_hit, c_br_hit, c_end_hit, cfg_en;
  logic [1:0] f_br_ch, f_end_ch, s_br_ch, s_end_ch, c_br_ch, c_end_ch, cfg_ch;
  logic [0:0] c_tag_gen;
  logic [7:0] c_tag_iter;
  logic [NC-1:0][7:0] cons_iter, stack_top, iter_load, stk_push_val;
  logic [NC-1:0][0:0] cons_gen;
  cnt_op_e [NC-1:0] iter_op, cgen_op, pgen_op;
  logic [NC-1:0] stk_push, stk_pop, stk_rst;
  logic lk_en, rm_en, clr_en;
  logic [1:0] lk_ch, rm_ch, clr_ch;
  logic [0:0] lk_gen, rm_gen;
  logic [7:0] lk_iter, rm_iter;
  int checks = 0, failures = 0;

  boss_consume_ctrl dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      // fetch and squash are never reported together (redirect rule)
      automatic bit sq = ($urandom_range(0, 2) == 0);
      f_br_hit  = !sq && ($urandom_range(0, 1) == 0);
      f_end_hit = !sq && !f_br_hit && ($urandom_range(0, 2) == 0);
      s_br_hit  = sq && ($urandom_range(0, 1) == 0);
      s_end_hit = sq && !s_br_hit;
      c_br_hit  = ($urandom_range(0, 1) == 0);
      c_end_hit = !c_br_hit && ($urandom_range(0, 2) == 0);
      cfg_en    = ($urandom_range(0, 9) == 0);
      {f_br_ch, f_end_ch, s_br_ch, s_end_ch, c_br_ch, c_end_ch, cfg_ch} = 14'($urandom);
      c_tag_gen = 1'($urandom);
      c_tag_iter = 8'($urandom);
      for (int c = 0; c < NC; c++) begin
        cons_iter[c] = 8'($urandom);
        stack_top[c] = 8'($urandom);
        cons_gen[c]  = 1'($urandom);
      end
      #1;
      for (int c = 0; c < NC; c++) begin
        automatic bit cfg = cfg_en && cfg_ch == c;
        automatic cnt_op_e e_iter = CNT_HOLD, e_cgen = CNT_HOLD, e_pgen = CNT_HOLD;
        automatic bit e_push = 0, e_pop = 0;
        if (f_br_hit && f_br_ch == c)   e_iter = CNT_INC;
        if (f_end_hit && f_end_ch == c) begin e_iter = CNT_RST; e_cgen = CNT_INC; e_push = 1; end
        if (s_br_hit && s_br_ch == c)   e_iter = CNT_DEC;
        if (s_end_hit && s_end_ch == c) begin e_iter = CNT_LOAD; e_cgen = CNT_DEC; e_pop = 1; end
        if (c_end_hit && c_end_ch == c) e_pgen = CNT_INC;
        if (cfg) begin e_iter = CNT_RST; e_cgen = CNT_RST; e_pgen = CNT_RST; e_push = 0; e_pop = 0; end
        check(iter_op[c] == e_iter, $sformatf("t=%0d ch%0d iter_op %s want %s", t, c, iter_op[c].name(), e_iter.name()));
        check(cgen_op[c] == e_cgen, $sformatf("t=%0d ch%0d cgen_op %s want %s", t, c, cgen_op[c].name(), e_cgen.name()));
        check(pgen_op[c] == e_pgen, $sformatf("t=%0d ch%0d pgen_op %s want %s", t, c, pgen_op[c].name(), e_pgen.name()));
        check(stk_push[c] == e_push && stk_pop[c] == e_pop && stk_rst[c] == cfg,
              $sformatf("t=%0d ch%0d stack ctl", t, c));
        if (e_iter == CNT_LOAD) check(iter_load[c] == stack_top[c], $sformatf("t=%0d ch%0d reload value", t, c));
        if (e_push) check(stk_push_val[c] == cons_iter[c], $sformatf("t=%0d ch%0d push value", t, c));
      end
      check(lk_en == f_br_hit, $sformatf("t=%0d lk_en", t));
      if (f_br_hit)
        check(lk_ch == f_br_ch && lk_gen == cons_gen[f_br_ch] && lk_iter == cons_iter[f_br_ch],
              $sformatf("t=%0d lookup address", t));
      check(rm_en == c_br_hit, $sformatf("t=%0d rm_en", t));
      if (c_br_hit)
        check(rm_ch == c_br_ch && rm_gen == c_tag_gen && rm_iter == c_tag_iter, $sformatf("t=%0d removal", t));
      check(clr_en == cfg_en && (!cfg_en || clr_ch == cfg_ch), $sformatf("t=%0d clear", t));
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
