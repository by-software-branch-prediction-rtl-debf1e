// boss_consume_ctrl -- consumption index update logic of the BOSS unit.
//
// Takes the channel hits of the Branch-PC and Loop-End PC tables for the fetched,
// squashed and committed instruction of this cycle, plus decoded BOSS_open /
// BOSS_close stores, and turns them into:
//   target branch fetched   -> outcome lookup at <ch, consumer gen#, consumer iter#>,
//                              consumer iter# + 1
//   target branch squashed  -> consumer iter# - 1
//   target branch committed -> remove its outcome, named by the <gen#, iter#> tag
//                              it was looked up with
//   Loop-End fetched        -> push consumer iter# on the iter# stack, reset it to
//                              0, consumer gen# + 1
//   Loop-End squashed       -> pop the iter# stack into consumer iter#,
//                              consumer gen# - 1
//   Loop-End committed      -> producer gen# + 1
//   BOSS_open / BOSS_close  -> reset all counters and the stack of the channel and
//                              clear its outcome entries
// A configuration of a channel overrides any other event on it in the same cycle.
//
// Purely combinational; the tables register the result at the next edge, so the
// lookup uses the counter values from before this cycle's events. The core is
// expected to report one fetched, one squashed and one committed instruction per
// cycle, squashes youngest first and never together with a fetch (the front end is
// being redirected then); the BOSS unit asserts the last rule.
//
// The event-to-operation mapping follows the paper; the per-cycle event widths,
// the ordering rules and the commit tag are this design's choices.
module boss_consume_ctrl
  import boss_pkg::*;
#(
  parameter int unsigned N_CH    = NUM_CH,
  parameter int unsigned N_ITERS = NUM_ITERS,
  parameter int unsigned W_GEN   = GEN_W,
  localparam int unsigned CH_W   = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned IT_W   = $clog2(N_ITERS)
) (
  // events (channel hits of the PC tables)
  input  logic                         f_br_hit,
  input  logic [CH_W-1:0]              f_br_ch,
  input  logic                         f_end_hit,
  input  logic [CH_W-1:0]              f_end_ch,
  input  logic                         s_br_hit,
  input  logic [CH_W-1:0]              s_br_ch,
  input  logic                         s_end_hit,
  input  logic [CH_W-1:0]              s_end_ch,
  input  logic                         c_br_hit,
  input  logic [CH_W-1:0]              c_br_ch,
  input  logic [W_GEN-1:0]             c_tag_gen,
  input  logic [IT_W-1:0]              c_tag_iter,
  input  logic                         c_end_hit,
  input  logic [CH_W-1:0]              c_end_ch,
  input  logic                         cfg_en,
  input  logic [CH_W-1:0]              cfg_ch,
  // current table contents
  input  logic [N_CH-1:0][IT_W-1:0]    cons_iter,
  input  logic [N_CH-1:0][W_GEN-1:0]   cons_gen,
  input  logic [N_CH-1:0][IT_W-1:0]    stack_top,
  // table operations
  output cnt_op_e [N_CH-1:0]           iter_op,
  output logic [N_CH-1:0][IT_W-1:0]    iter_load,
  output cnt_op_e [N_CH-1:0]           cgen_op,
  output cnt_op_e [N_CH-1:0]           pgen_op,
  output logic [N_CH-1:0]              stk_push,
  output logic [N_CH-1:0][IT_W-1:0]    stk_push_val,
  output logic [N_CH-1:0]              stk_pop,
  output logic [N_CH-1:0]              stk_rst,
  // outcome table
  output logic                         lk_en,
  output logic [CH_W-1:0]              lk_ch,
  output logic [W_GEN-1:0]             lk_gen,
  output logic [IT_W-1:0]              lk_iter,
  output logic                         rm_en,
  output logic [CH_W-1:0]              rm_ch,
  output logic [W_GEN-1:0]             rm_gen,
  output logic [IT_W-1:0]              rm_iter,
  output logic                         clr_en,
  output logic [CH_W-1:0]              clr_ch
);

  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      automatic logic cfg   = cfg_en    && cfg_ch   == CH_W'(c);
      automatic logic s_end = s_end_hit && s_end_ch == CH_W'(c);
      automatic logic s_br  = s_br_hit  && s_br_ch  == CH_W'(c);
      automatic logic f_end = f_end_hit && f_end_ch == CH_W'(c);
      automatic logic f_br  = f_br_hit  && f_br_ch  == CH_W'(c);
      automatic logic c_end = c_end_hit && c_end_ch == CH_W'(c);

      iter_load[c]    = stack_top[c];
      stk_push_val[c] = cons_iter[c];

      // consumer iter#
      if      (cfg)   iter_op[c] = CNT_RST;
      else if (s_end) iter_op[c] = CNT_LOAD;
      else if (s_br)  iter_op[c] = CNT_DEC;
      else if (f_end) iter_op[c] = CNT_RST;
      else if (f_br)  iter_op[c] = CNT_INC;
      else            iter_op[c] = CNT_HOLD;

      // consumer gen#
      if      (cfg)   cgen_op[c] = CNT_RST;
      else if (s_end) cgen_op[c] = CNT_DEC;
      else if (f_end) cgen_op[c] = CNT_INC;
      else            cgen_op[c] = CNT_HOLD;

      // producer gen#
      if      (cfg)   pgen_op[c] = CNT_RST;
      else if (c_end) pgen_op[c] = CNT_INC;
      else            pgen_op[c] = CNT_HOLD;

      // iter# stack
      stk_rst[c]  = cfg;
      stk_pop[c]  = !cfg && s_end;
      stk_push[c] = !cfg && !s_end && f_end;
    end

    lk_en   = f_br_hit;
    lk_ch   = f_br_ch;
    lk_gen  = cons_gen[f_br_ch];
    lk_iter = cons_iter[f_br_ch];

    rm_en   = c_br_hit;
    rm_ch   = c_br_ch;
    rm_gen  = c_tag_gen;
    rm_iter = c_tag_iter;

    clr_en  = cfg_en;
    clr_ch  = cfg_ch;
  end

endmodule
