// boss_unit -- BOSS (Branch-Outcome Side-channel Stream) unit, top level.
//
// Software computes the outcomes of a hard-to-predict branch inside a loop ahead
// of time (a "pre-execute loop") and stores them, one byte per loop iteration,
// into a per-channel address range. This unit keeps those outcomes and, when the
// front end fetches an instance of the configured branch, supplies the stored
// outcome instead of the conventional prediction. It sits beside the branch
// predictor and watches three streams of the core:
//   fetch  (f_*)  every fetched instruction, with the conventional direction;
//   squash (s_*)  every squashed instruction, youngest first, one per cycle;
//   commit (c_*)  every committed instruction, one per cycle, with its store
//                 address/data if it is a store.
// Committed stores into the BOSS range configure channels (BOSS_open/close) and
// fill the outcome table (BOSS_write). A fetched target branch looks up
// <channel, consumer gen#, consumer iter#>; on a hit f_pred_taken is the stored
// outcome and f_boss_hit is 1, otherwise f_pred_taken = f_conv_taken. The unit
// also returns f_tag = {gen#, iter#} of the lookup, which the core carries with
// the branch and hands back as c_tag when it commits, so the used outcome can be
// removed. Loads can read the state (ld_*). 'active' is 1 while any channel is
// open; with no channel open nothing matches and the unit is idle.
//
// Timing: the lookup and the prediction are combinational in the fetch cycle;
// all table updates land at the next rising edge. Synchronous active-low reset.
//
// Block structure follows the paper's block diagram: store decoder, Branch-PC and
// Loop-End PC tables, outcome table, producer and consumer gen# tables, consumer
// iter# table, iter# stack, consumption index update logic and the prediction
// multiplexer. Port widths, the memory map, the commit tag and the per-cycle event
// rules are this design's choices.
module boss_unit
  import boss_pkg::*;
#(
  parameter int unsigned N_CH    = NUM_CH,
  parameter int unsigned N_ITERS = NUM_ITERS,
  parameter int unsigned W_GEN   = GEN_W,
  parameter int unsigned DEPTH   = STACK_DEPTH,
  parameter int unsigned W_PC    = PC_W,
  parameter int unsigned W_ADDR  = ADDR_W,
  parameter int unsigned N_LANES = ST_BYTES,
  localparam int unsigned CH_W   = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned IT_W   = $clog2(N_ITERS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // fetch
  input  logic                  f_valid,
  input  logic [W_PC-1:0]       f_pc,
  input  logic                  f_conv_taken,
  output logic                  f_pred_taken,
  output logic                  f_boss_hit,
  output logic [W_GEN-1:0]      f_tag_gen,
  output logic [IT_W-1:0]       f_tag_iter,
  // squash
  input  logic                  s_valid,
  input  logic [W_PC-1:0]       s_pc,
  // commit
  input  logic                  c_valid,
  input  logic [W_PC-1:0]       c_pc,
  input  logic [W_GEN-1:0]      c_tag_gen,
  input  logic [IT_W-1:0]       c_tag_iter,
  input  logic                  c_is_store,
  input  logic [W_ADDR-1:0]     c_st_addr,
  input  logic [8*N_LANES-1:0]  c_st_data,
  input  logic [N_LANES-1:0]    c_st_be,
  // state readout
  input  logic [W_ADDR-1:0]     ld_addr,
  output logic                  ld_hit,
  output logic [63:0]           ld_data,
  // status
  output logic                  active
);

  // ---------------- store decoder ----------------
  boss_op_e             dec_op;
  logic [CH_W-1:0]      dec_ch;
  logic [IT_W-1:0]      dec_iter;
  logic [N_LANES-1:0]   dec_lane_en, dec_lane_out;
  logic [W_PC-1:0]      dec_br_pc, dec_end_pc;

  boss_mmio_decode #(.N_CH(N_CH), .N_ITERS(N_ITERS), .N_LANES(N_LANES), .W_PC(W_PC),
                     .W_ADDR(W_ADDR)) u_dec (
    .st_valid(c_valid && c_is_store), .st_addr(c_st_addr), .st_pc(c_pc),
    .st_data(c_st_data), .st_be(c_st_be),
    .op(dec_op), .ch(dec_ch), .iter(dec_iter), .lane_en(dec_lane_en),
    .lane_outcome(dec_lane_out), .br_pc(dec_br_pc), .end_pc(dec_end_pc));

  logic cfg_open, cfg_close, cfg_en;
  assign cfg_open  = (dec_op == OP_OPEN);
  assign cfg_close = (dec_op == OP_CLOSE);
  assign cfg_en    = cfg_open || cfg_close;

  // ---------------- PC tables: search ports 0 = fetch, 1 = squash, 2 = commit ----------------
  logic [2:0]            srch_valid;
  logic [2:0][W_PC-1:0]  srch_pc;
  logic [2:0]            br_hit, end_hit;
  logic [2:0][CH_W-1:0]  br_ch, end_ch;
  logic [N_CH-1:0]       br_open, end_open;

  assign srch_valid = {c_valid && !c_is_store, s_valid, f_valid};
  assign srch_pc    = {c_pc, s_pc, f_pc};

  boss_pc_table #(.N_CH(N_CH), .W_PC(W_PC), .N_SRCH(3)) u_br_tab (
    .clk, .rst_n,
    .wr_en(cfg_open), .wr_ch(dec_ch), .wr_pc(dec_br_pc),
    .clr_en(cfg_close), .clr_ch(dec_ch),
    .srch_valid, .srch_pc, .srch_hit(br_hit), .srch_ch(br_ch), .open(br_open));

  boss_pc_table #(.N_CH(N_CH), .W_PC(W_PC), .N_SRCH(3)) u_end_tab (
    .clk, .rst_n,
    .wr_en(cfg_open), .wr_ch(dec_ch), .wr_pc(dec_end_pc),
    .clr_en(cfg_close), .clr_ch(dec_ch),
    .srch_valid, .srch_pc, .srch_hit(end_hit), .srch_ch(end_ch), .open(end_open));

  assign active = |br_open;

  // ---------------- counters and stack ----------------
  cnt_op_e [N_CH-1:0]          iter_op, cgen_op, pgen_op;
  logic [N_CH-1:0][IT_W-1:0]   iter_load, cons_iter, stk_push_val, stack_top;
  logic [N_CH-1:0][W_GEN-1:0]  cons_gen, prod_gen;
  logic [N_CH-1:0]             stk_push, stk_pop, stk_rst;

  boss_iter_table #(.N_CH(N_CH), .IT_W(IT_W)) u_cons_iter (
    .clk, .rst_n, .op(iter_op), .load_val(iter_load), .val(cons_iter));

  boss_iter_stack #(.N_CH(N_CH), .IT_W(IT_W), .DEPTH(DEPTH)) u_iter_stack (
    .clk, .rst_n, .push(stk_push), .push_val(stk_push_val), .pop(stk_pop),
    .rst_ch(stk_rst), .top(stack_top));

  boss_gen_table #(.N_CH(N_CH), .W(W_GEN)) u_cons_gen (
    .clk, .rst_n, .op(cgen_op), .val(cons_gen));

  boss_gen_table #(.N_CH(N_CH), .W(W_GEN)) u_prod_gen (
    .clk, .rst_n, .op(pgen_op), .val(prod_gen));

  // ---------------- consumption index update logic ----------------
  logic                 lk_en, rm_en, clr_en;
  logic [CH_W-1:0]      lk_ch, rm_ch, clr_ch;
  logic [W_GEN-1:0]     lk_gen, rm_gen;
  logic [IT_W-1:0]      lk_iter, rm_iter;

  boss_consume_ctrl #(.N_CH(N_CH), .N_ITERS(N_ITERS), .W_GEN(W_GEN)) u_ctrl (
    .f_br_hit(br_hit[0]),  .f_br_ch(br_ch[0]),
    .f_end_hit(end_hit[0]), .f_end_ch(end_ch[0]),
    .s_br_hit(br_hit[1]),  .s_br_ch(br_ch[1]),
    .s_end_hit(end_hit[1]), .s_end_ch(end_ch[1]),
    .c_br_hit(br_hit[2]),  .c_br_ch(br_ch[2]),
    .c_tag_gen, .c_tag_iter,
    .c_end_hit(end_hit[2]), .c_end_ch(end_ch[2]),
    .cfg_en, .cfg_ch(dec_ch),
    .cons_iter, .cons_gen, .stack_top,
    .iter_op, .iter_load, .cgen_op, .pgen_op,
    .stk_push, .stk_push_val, .stk_pop, .stk_rst,
    .lk_en, .lk_ch, .lk_gen, .lk_iter,
    .rm_en, .rm_ch, .rm_gen, .rm_iter,
    .clr_en, .clr_ch);

  // ---------------- outcome table ----------------
  logic                 lk_hit, lk_outcome;
  logic [CH_W-1:0]      rd_ch;
  logic [IT_W-1:0]      rd_iter;
  logic [1:0]           rd_entry;
  logic                 wr_en;

  // A BOSS_write to a channel that is not open is dropped.
  assign wr_en = (dec_op == OP_WRITE) && br_open[dec_ch];

  boss_outcome_lut #(.N_CH(N_CH), .N_ITERS(N_ITERS), .W_GEN(W_GEN), .N_LANES(N_LANES)) u_lut (
    .clk, .rst_n,
    .wr_en, .wr_ch(dec_ch), .wr_iter(dec_iter), .wr_lane_en(dec_lane_en),
    .wr_lane_outcome(dec_lane_out), .wr_gen(prod_gen[dec_ch]),
    .clr_en, .clr_ch,
    .lk_en, .lk_ch, .lk_gen, .lk_iter, .lk_hit, .lk_outcome,
    .rm_en, .rm_ch, .rm_gen, .rm_iter,
    .rd_ch, .rd_iter, .rd_entry);

  // ---------------- state readout ----------------
  boss_state_readout #(.N_CH(N_CH), .N_ITERS(N_ITERS), .W_GEN(W_GEN), .W_ADDR(W_ADDR)) u_rd (
    .ld_addr, .ld_hit, .ld_data, .rd_ch, .rd_iter, .rd_entry,
    .open(br_open), .cons_iter, .stack_top, .cons_gen, .prod_gen);

  // ---------------- prediction multiplexer ----------------
  boss_pred_mux u_mux (
    .conv_taken(f_conv_taken), .boss_hit(lk_hit), .boss_taken(lk_outcome),
    .pred_taken(f_pred_taken));

  assign f_boss_hit = lk_hit;
  assign f_tag_gen  = lk_gen;
  assign f_tag_iter = lk_iter;

  // The front end is redirected while squashes are reported: no fetch alongside.
  a_no_fetch_during_squash: assert property (@(posedge clk) disable iff (!rst_n)
    !(s_valid && f_valid));

  // Both PC tables are written and cleared by the same configuration stores.
  a_tables_agree: assert property (@(posedge clk) disable iff (!rst_n)
    br_open == end_open);

endmodule
