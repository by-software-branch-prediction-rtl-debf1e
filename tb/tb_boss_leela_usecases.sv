// tb_boss_leela_usecases -- the BOSS unit running the three loop patterns taken
// from a Go engine's board code (four neighbours per point, so the target loops
// have trip count 4), at the unit's default size.
//
//  1. Partial coverage (kill_or_connect): a pre-execute loop covers only
//     iterations n..m of the main loop, for the nine ranges 0-only, 0-1, 0-2,
//     1-only, 1-2, 1-3, 2-only, 2-3, 3-only and the full range 0-3. The main
//     loop exits early at random. Each covered and fetched instance must hit with
//     the written outcome, and every other instance must miss. That includes
//     iterations a previous call had covered, whose leftovers must be discarded.
//  2. Correlation (kill_or_connect feeding kill_neighbours): one function's loop
//     writes outcomes on channel 2 for a branch in another function's loop. The
//     first generation of that loop hits for every written iteration, and later
//     generations, for which nothing is written, miss.
//  3. Record-and-replay (save_critical_neighbours): the store of iteration k sits
//     in the loop body just before branch k. Under the unit's rules the outcome
//     is tagged with the current generation and removed when branch k commits,
//     so it is never used. The test checks that the unit then stays out of the
//     way: no hits, the conventional direction throughout, and no stale entries.
//
// Instructions, including the BOSS stores, flow through a reorder-buffer queue:
// fetched in program order, committed oldest first.
module tb_boss_leela_usecases;
  import boss_pkg::*;

  localparam logic [63:0] B = BOSS_BASE;

  logic clk = 0, rst_n = 0;
  logic f_valid, f_conv_taken, f_pred_taken, f_boss_hit;
  logic [63:0] f_pc, s_pc, c_pc, c_st_addr, ld_addr, ld_data;
  logic [0:0] f_tag_gen, c_tag_gen;
  logic [7:0] f_tag_iter, c_tag_iter;
  logic s_valid, c_valid, c_is_store, ld_hit, active;
  logic [127:0] c_st_data;
  logic [15:0] c_st_be;

  boss_unit dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    logic [63:0]  pc;
    bit           is_store;
    logic [63:0]  addr;
    logic [127:0] data;
    logic [15:0]  be;
    logic [0:0]   tag_gen;
    logic [7:0]   tag_iter;
  } rob_t;
  rob_t rob [$];

  int checks = 0, failures = 0;
  int n_pc_hits, n_pc_hits_expected, n_corr_hits, n_corr_misses, n_replay_fetches, n_early_exit;

  // PCs: channel 0 in kill_or_connect, channel 1 in save_critical_neighbours,
  // channel 2's branch in kill_neighbours
  localparam logic [63:0] KOC_OPEN = 64'h4000_1000, KOC_BR = 64'h4000_1100, KOC_END = 64'h4000_1180;
  localparam logic [63:0] SCN_OPEN = 64'h4000_2000, SCN_BR = 64'h4000_2100, SCN_END = 64'h4000_2180;
  localparam logic [63:0] KN_OPEN  = 64'h4000_3000, KN_BR  = 64'h4000_3100, KN_END  = 64'h4000_3180;
  localparam logic [63:0] ST_PC    = 64'h4000_5000;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL @%0t %s", $time, what);
    end
  endtask

  task automatic idle_inputs();
    f_valid = 0; f_pc = 0; f_conv_taken = 0; s_valid = 0; s_pc = 0;
    c_valid = 0; c_pc = 0; c_tag_gen = 0; c_tag_iter = 0; c_is_store = 0;
    c_st_addr = 0; c_st_data = 0; c_st_be = 0;
  endtask

  task automatic tick();
    @(posedge clk);
    #1;
    idle_inputs();
  endtask

  // fetch one instruction; returns the BOSS hit and direction
  task automatic fetch(logic [63:0] pc, bit is_store, logic [63:0] a, logic [127:0] d,
                       logic [15:0] be, output bit hit, output bit taken, output bit conv);
    rob_t e;
    conv = 1'($urandom);
    f_valid = 1; f_pc = pc; f_conv_taken = conv;
    #1;
    hit = f_boss_hit; taken = f_pred_taken;
    if (!hit) check(taken == conv, "a miss passes the conventional direction");
    e.pc = pc; e.is_store = is_store; e.addr = a; e.data = d; e.be = be;
    e.tag_gen = f_tag_gen; e.tag_iter = f_tag_iter;
    rob.push_back(e);
    tick();
  endtask

  task automatic fetch_plain(logic [63:0] pc);
    bit h, t, cv;
    fetch(pc, 0, 0, 0, 0, h, t, cv);
    check(!h, "only target branches hit");
  endtask

  // a BOSS store enters the pipeline like any other instruction
  task automatic fetch_store(logic [63:0] a, logic [127:0] d, logic [15:0] be);
    bit h, t, cv;
    fetch(ST_PC, 1, a, d, be, h, t, cv);
  endtask

  task automatic commit_oldest();
    rob_t e = rob.pop_front();
    c_valid = 1; c_pc = e.pc; c_tag_gen = e.tag_gen; c_tag_iter = e.tag_iter;
    c_is_store = e.is_store; c_st_addr = e.addr; c_st_data = e.data; c_st_be = e.be;
    tick();
  endtask

  task automatic drain();
    while (rob.size() != 0) commit_oldest();
  endtask

  task automatic open_ch(int ch, logic [63:0] opc, logic [63:0] br, logic [63:0] en);
    fetch_store(B + 64'(ch * 512 + 256), {64'h0, 32'(en - opc), 32'(br - opc)}, 16'h00FF);
    rob[$].pc = opc;
    drain();
  endtask

  task automatic boss_write(int ch, int k, bit outcome);
    fetch_store(B + 64'(ch * 512 + k), 128'(outcome), 16'h0001);
  endtask

  task automatic entry_valid(int ch, int k, output bit v);
    ld_addr = B + 64'(ch * 512 + k);
    #1;
    v = ld_data[1];
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lo [10] = '{0, 0, 0, 1, 1, 1, 2, 2, 3, 0};
    int hi [10] = '{0, 1, 2, 1, 2, 3, 2, 3, 3, 3};
    idle_inputs();
    ld_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;

    // ---------------- 1. partial coverage ----------------
    open_ch(0, KOC_OPEN, KOC_BR, KOC_END);
    for (int r = 0; r < 10; r++) begin
      automatic int hits_this_range = 0, expected_this_range = 0;
      for (int call = 0; call < 12; call++) begin
        bit libs_le1 [4];
        for (int k = 0; k < 4; k++) libs_le1[k] = 1'($urandom);
        // pre-execute loop over n..m
        for (int k = lo[r]; k <= hi[r]; k++) begin
          fetch_plain(ST_PC - 64'h20);                 // address computation and loads
          boss_write(0, k, libs_le1[k]);
        end
        drain();                                       // the writes commit before the main loop
        // main loop with an early exit
        for (int k = 0; k < 4; k++) begin
          bit h, t, cv;
          automatic bit covered = (k >= lo[r] && k <= hi[r]);
          fetch(KOC_BR, 0, 0, 0, 0, h, t, cv);
          check(h == covered, $sformatf("range %0d-%0d call %0d iteration %0d: hit %0b", lo[r], hi[r], call, k, h));
          if (h) check(t == libs_le1[k], $sformatf("range %0d-%0d iteration %0d: outcome", lo[r], hi[r], k));
          hits_this_range += h;
          expected_this_range += covered;
          fetch_plain(KOC_BR + 4);
          if ($urandom_range(0, 4) == 0) begin n_early_exit++; break; end   // retval = true; break
        end
        fetch_plain(KOC_END);                          // first instruction after the loop
        drain();
        for (int k = 0; k < 4; k++) begin
          bit v;
          entry_valid(0, k, v);
          check(!v || (k >= lo[r] && k <= hi[r]), "nothing outside the covered range is held");
        end
      end
      $display("partial coverage %0d-%0d: %0d hits of %0d covered instances", lo[r], hi[r], hits_this_range, expected_this_range);
      n_pc_hits += hits_this_range;
      n_pc_hits_expected += expected_this_range;
    end
    check(n_pc_hits == n_pc_hits_expected && n_pc_hits > 0, "every covered instance hit");
    check(n_early_exit > 0, "coverage: early exits happened");

    // ---------------- 2. correlation across loops ----------------
    open_ch(2, KN_OPEN, KN_BR, KN_END);
    for (int call = 0; call < 8; call++) begin
      bit src [4];
      automatic int written = 0;
      // kill_or_connect: writes the source branch's outcomes for kill_neighbours
      for (int k = 0; k < 4; k++) begin
        src[k] = 1'($urandom);
        boss_write(2, k, src[k]);
        written++;
        fetch_plain(KOC_BR + 64'h40);                  // source branch, not a BOSS target
        if (src[k] && $urandom_range(0, 1) == 0) break;  // retval = true; break
      end
      drain();
      // kill_neighbours: do { for k in 0..3 { target branch } } while (...)
      for (int gen = 0; gen < 3; gen++) begin
        for (int k = 0; k < 4; k++) begin
          bit h, t, cv;
          fetch(KN_BR, 0, 0, 0, 0, h, t, cv);
          if (gen == 0 && k < written) begin
            check(h && t == src[k], $sformatf("correlated outcome, call %0d iteration %0d", call, k));
            n_corr_hits += h;
          end else begin
            check(!h, $sformatf("no outcome for generation %0d iteration %0d", gen, k));
            n_corr_misses++;
          end
        end
        fetch_plain(KN_END);
        // the front end may run one generation ahead, never two (1-bit generations)
        if (gen % 2 == 1 || $urandom_range(0, 1) == 0) drain();
      end
      drain();
    end
    check(n_corr_hits > 0 && n_corr_misses > 0, "coverage: correlated hits and later-generation misses");

    // ---------------- 3. record-and-replay ----------------
    open_ch(1, SCN_OPEN, SCN_BR, SCN_END);
    for (int call = 0; call < 8; call++) begin
      for (int k = 0; k < 4; k++) begin
        bit h, t, cv;
        automatic bit cond = 1'($urandom);
        boss_write(1, k, cond);                        // record this generation's outcome
        fetch(SCN_BR, 0, 0, 0, 0, h, t, cv);           // target branch for replay
        check(!h && t == cv, $sformatf("record-and-replay call %0d iteration %0d stays conventional", call, k));
        n_replay_fetches++;
        if ($urandom_range(0, 1) == 0) commit_oldest();
      end
      fetch_plain(SCN_END);
      drain();
      for (int k = 0; k < 4; k++) begin
        bit v;
        entry_valid(1, k, v);
        check(!v, "recorded entry removed by its own branch's commit");
      end
    end

    $display("partial-coverage hits=%0d early-exits=%0d correlated hits=%0d misses=%0d replay fetches=%0d",
             n_pc_hits, n_early_exit, n_corr_hits, n_corr_misses, n_replay_fetches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
