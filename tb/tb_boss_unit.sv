// tb_boss_unit -- end-to-end test of the BOSS unit at its default size.
//
// The testbench plays a small out-of-order core: it fetches instructions into a
// reorder-buffer queue, squashes the youngest ones, commits the oldest ones in
// order, and commits the stores that software issues into the BOSS range. It
// keeps its own view of what software has written and of which loop iteration
// and generation each fetched branch belongs to, and checks every prediction,
// every returned tag and, through loads, the stored state.
//
// Scenarios: a short loop (trip count 4) run over many generations with vector
// and byte stores, partial coverage, early loop exits, squashed branches and
// squashed Loop-End instructions, outcomes that arrive too late, and a record-and-
// replay style use; a long loop of 300 iterations whose iteration numbers wrap
// around the 256 outcome slots; a second channel running interleaved; close.
// Each mechanism is counted and a mechanism that never happened is a failure.
module tb_boss_unit;
  import boss_pkg::*;

  localparam logic [63:0] B = BOSS_BASE;
  localparam int NC = 4;

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

  // ---------------- bookkeeping ----------------
  typedef enum int {K_BR, K_END, K_OTHER} kind_e;
  typedef struct {
    logic [63:0] pc;
    kind_e       kind;
    int          ch;
    logic [0:0]  tag_gen;
    logic [7:0]  tag_iter;
    int          k_before;   // front-end iteration count before this instruction
  } rob_t;
  rob_t rob [$];

  // per-channel program counters of the configuring store, the branch and the Loop-End
  logic [63:0] open_pc [NC], br_pc [NC], end_pc [NC];
  // software/front-end view
  bit  is_open [NC];
  int  fe_k [NC], fe_g [NC];          // next iteration and generation the front end fetches
  int  prod_g [NC];                   // committed Loop-End count since open
  int  wr_gen [NC];                   // generation of the outcomes held
  bit  wr_v [NC][256], wr_o [NC][256];

  int checks = 0, failures = 0;
  int n_hit, n_miss_late, n_miss_uncovered, n_br_squash, n_end_squash, n_discard,
      n_wrap_hit, n_vec_write, n_remove, n_close, n_readout, n_cycles;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL @%0t %s", $time, what);
    end
  endtask

  task automatic idle_inputs();
    f_valid = 0; f_pc = 0; f_conv_taken = 0;
    s_valid = 0; s_pc = 0;
    c_valid = 0; c_pc = 0; c_tag_gen = 0; c_tag_iter = 0; c_is_store = 0;
    c_st_addr = 0; c_st_data = 0; c_st_be = 0;
  endtask

  task automatic tick();
    @(posedge clk);
    n_cycles++;
    #1;
    idle_inputs();
  endtask

  // ---------------- committed stores ----------------
  task automatic st_commit(logic [63:0] pc, logic [63:0] a, logic [127:0] d, logic [15:0] be);
    c_valid = 1; c_is_store = 1; c_pc = pc; c_st_addr = a; c_st_data = d; c_st_be = be;
    tick();
  endtask

  task automatic boss_open(int ch);
    // configuration word: branch and Loop-End distances from the configuring store
    logic [31:0] dbr  = 32'(br_pc[ch] - open_pc[ch]);
    logic [31:0] dend = 32'(end_pc[ch] - open_pc[ch]);
    check(rob.size() == 0, "open with an empty pipeline");
    st_commit(open_pc[ch], B + 64'(ch * 512 + 256), {64'h0, dend, dbr}, 16'h00FF);
    is_open[ch] = 1; fe_k[ch] = 0; fe_g[ch] = 0; prod_g[ch] = 0; wr_gen[ch] = 0;
    for (int i = 0; i < 256; i++) wr_v[ch][i] = 0;
  endtask

  task automatic boss_close(int ch);
    st_commit(open_pc[ch], B + 64'(ch * 512 + 256), 128'h0, 16'h00FF);
    is_open[ch] = 0;
    for (int i = 0; i < 256; i++) wr_v[ch][i] = 0;
    n_close++;
  endtask

  // BOSS_write of n outcomes (n <= 16) for iterations k0.. of channel ch, one store
  task automatic boss_write(int ch, int k0, int n, bit outc [$]);
    logic [127:0] d = '0;
    logic [15:0] be = '0;
    for (int l = 0; l < n; l++) begin
      d[8*l] = outc[l];
      be[l]  = 1'b1;
    end
    st_commit(64'h4000_8000 + 64'(ch * 16), B + 64'(ch * 512 + (k0 % 256)), d, be);
    if (is_open[ch]) begin
      if (prod_g[ch] != wr_gen[ch]) begin
        for (int i = 0; i < 256; i++) if (wr_v[ch][i]) begin n_discard++; break; end
        for (int i = 0; i < 256; i++) wr_v[ch][i] = 0;
        wr_gen[ch] = prod_g[ch];
      end
      for (int l = 0; l < n; l++) begin
        wr_v[ch][(k0 + l) % 256] = 1;
        wr_o[ch][(k0 + l) % 256] = outc[l];
      end
      if (n > 1) n_vec_write++;
    end
  endtask

  // ---------------- fetch ----------------
  task automatic fetch_br(int ch);
    rob_t e;
    bit conv = 1'($urandom);
    bit exp_hit;
    int slot = fe_k[ch] % 256;
    f_valid = 1; f_pc = br_pc[ch]; f_conv_taken = conv;
    #1;
    exp_hit = is_open[ch] && wr_v[ch][slot] && ((wr_gen[ch] % 2) == (fe_g[ch] % 2));
    check(f_boss_hit == exp_hit, $sformatf("ch%0d gen %0d iter %0d: hit %0b want %0b", ch, fe_g[ch], fe_k[ch], f_boss_hit, exp_hit));
    check(f_pred_taken == (exp_hit ? wr_o[ch][slot] : conv), $sformatf("ch%0d gen %0d iter %0d: direction", ch, fe_g[ch], fe_k[ch]));
    if (is_open[ch])
      check(f_tag_gen == 1'(fe_g[ch]) && f_tag_iter == 8'(fe_k[ch]), $sformatf("ch%0d tag %0d/%0d want %0d/%0d", ch, f_tag_gen, f_tag_iter, fe_g[ch] % 2, fe_k[ch] % 256));
    if (exp_hit) begin
      n_hit++;
      if (fe_k[ch] >= 256) n_wrap_hit++;
    end else if (is_open[ch]) begin
      if ((wr_gen[ch] % 2) != (fe_g[ch] % 2)) n_miss_late++;
      else n_miss_uncovered++;
    end
    e.pc = br_pc[ch]; e.kind = K_BR; e.ch = ch; e.tag_gen = f_tag_gen; e.tag_iter = f_tag_iter;
    e.k_before = fe_k[ch];
    rob.push_back(e);
    fe_k[ch]++;
    tick();
  endtask

  task automatic fetch_end(int ch);
    rob_t e;
    f_valid = 1; f_pc = end_pc[ch]; f_conv_taken = 1'($urandom);
    #1;
    check(!f_boss_hit, "Loop-End instruction is not predicted by BOSS");
    e.pc = end_pc[ch]; e.kind = K_END; e.ch = ch; e.tag_gen = 0; e.tag_iter = 0; e.k_before = fe_k[ch];
    rob.push_back(e);
    fe_k[ch] = 0;
    fe_g[ch]++;
    tick();
  endtask

  task automatic fetch_other();
    rob_t e;
    bit conv = 1'($urandom);
    f_valid = 1; f_pc = 64'h4000_7000 + 64'(4 * $urandom_range(0, 15)); f_conv_taken = conv;
    #1;
    check(!f_boss_hit && f_pred_taken == conv, "unrelated instruction keeps the conventional direction");
    e.pc = f_pc; e.kind = K_OTHER; e.ch = 0; e.tag_gen = 0; e.tag_iter = 0; e.k_before = 0;
    rob.push_back(e);
    tick();
  endtask

  // ---------------- squash / commit ----------------
  task automatic squash_youngest();
    rob_t e = rob.pop_back();
    s_valid = 1; s_pc = e.pc;
    if (e.kind == K_BR)  begin fe_k[e.ch]--; n_br_squash++; end
    if (e.kind == K_END) begin fe_k[e.ch] = e.k_before; fe_g[e.ch]--; n_end_squash++; end
    tick();
  endtask

  task automatic commit_oldest();
    rob_t e = rob.pop_front();
    c_valid = 1; c_pc = e.pc; c_tag_gen = e.tag_gen; c_tag_iter = e.tag_iter;
    if (e.kind == K_BR && is_open[e.ch] && (wr_gen[e.ch] % 2) == int'(e.tag_gen)) begin
      if (wr_v[e.ch][e.tag_iter]) n_remove++;
      wr_v[e.ch][e.tag_iter] = 0;
    end
    if (e.kind == K_END && is_open[e.ch]) prod_g[e.ch]++;
    tick();
  endtask

  task automatic drain();
    while (rob.size() != 0) commit_oldest();
  endtask

  // ---------------- state readout ----------------
  task automatic check_state(int ch);
    int i = $urandom_range(0, 255);
    ld_addr = B + 64'(ch * 512 + i);
    #1;
    check(ld_hit && ld_data[1] == wr_v[ch][i] && (!wr_v[ch][i] || ld_data[0] == wr_o[ch][i]),
          $sformatf("readout ch%0d iter %0d: %h want valid %0b", ch, i, ld_data, wr_v[ch][i]));
    ld_addr = B + 64'(ch * 512 + 256);
    #1;
    check(ld_data[63] == is_open[ch], $sformatf("readout ch%0d open", ch));
    if (is_open[ch])
      check(ld_data[7:0] == 8'(fe_k[ch]) && ld_data[16] == 1'(fe_g[ch]) && ld_data[24] == 1'(prod_g[ch]),
            $sformatf("readout ch%0d counters %h want iter %0d cgen %0d pgen %0d", ch, ld_data, fe_k[ch] % 256, fe_g[ch] % 2, prod_g[ch] % 2));
    n_readout++;
  endtask

  // random outcome vector
  function automatic void rand_outcomes(int n, ref bit q [$]);
    q.delete();
    for (int i = 0; i < n; i++) q.push_back(1'($urandom));
  endfunction

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- scenarios ----------------
  initial begin
    bit q [$];
    idle_inputs();
    ld_addr = 0;
    for (int c = 0; c < NC; c++) begin
      open_pc[c] = 64'h4000_1000 + 64'(c * 64'h1000);
      br_pc[c]   = open_pc[c] + 64'h0000_0240;
      end_pc[c]  = open_pc[c] + 64'h0000_0300;
      is_open[c] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;

    // nothing open: the unit is idle and passes the conventional direction
    check(!active, "inactive after reset");
    fetch_other();
    fetch_br(0);
    drain();

    boss_open(0);
    check(active, "active after BOSS_open");

    // ---- short loop, trip count 4, over 40 generations ----
    for (int g = 0; g < 40; g++) begin
      automatic int trip = 4;
      automatic int mode = $urandom_range(0, 5);
      // pre-execute loop: full coverage by one vector store, four byte stores,
      // or partial coverage of iterations 1..2 only
      rand_outcomes(4, q);
      if (mode == 0) begin
        boss_write(0, 1, 2, q);
      end else if (mode == 1) begin
        for (int k = 0; k < 4; k++) begin
          automatic bit one [$];
          one.push_back(q[k]);
          boss_write(0, k, 1, one);
        end
      end else begin
        boss_write(0, 0, 4, q);
      end
      // early exit from the loop in some generations
      if ($urandom_range(0, 4) == 0) trip = $urandom_range(1, 3);
      // target loop, with the odd misprediction squashing the youngest fetches
      for (int k = 0; k < trip; k++) begin
        fetch_br(0);
        fetch_other();
        if ($urandom_range(0, 3) == 0) begin
          squash_youngest();
          squash_youngest();
          k--;
        end
        if ($urandom_range(0, 2) == 0 && rob.size() > 2) commit_oldest();
      end
      fetch_end(0);
      // mispredicted loop exit: the front end ran into the next generation, then
      // the Loop-End instruction is squashed and the loop resumes
      if ($urandom_range(0, 3) == 0) begin
        fetch_br(0);
        squash_youngest();
        squash_youngest();
        fetch_br(0);
        fetch_end(0);
      end
      // late outcomes: the next generation's branch is fetched before its
      // BOSS_write commits
      if ($urandom_range(0, 3) == 0 && g < 39) begin
        fetch_br(0);
        fetch_other();
        squash_youngest();
        squash_youngest();
      end
      drain();
      if ($urandom_range(0, 3) == 0) check_state(0);
    end

    // ---- late outcomes that are then used once they arrive ----
    rand_outcomes(4, q);
    boss_write(0, 0, 4, q);
    fetch_br(0); fetch_br(0); fetch_br(0); fetch_br(0);
    fetch_end(0);
    fetch_br(0);                       // generation n+1, nothing written yet: late
    commit_oldest(); commit_oldest(); commit_oldest(); commit_oldest();
    commit_oldest();                   // Loop-End commits: producer generation advances
    rand_outcomes(4, q);
    boss_write(0, 0, 4, q);            // first write of the new generation
    fetch_br(0); fetch_br(0); fetch_br(0);
    drain();
    check_state(0);

    // ---- front end a whole generation ahead of the producer ----
    rand_outcomes(4, q);
    boss_write(0, 0, 4, q);
    for (int k = 0; k < 4; k++) fetch_br(0);
    fetch_end(0);
    for (int k = 0; k < 4; k++) fetch_br(0);   // next generation, nothing written yet
    fetch_end(0);
    fetch_br(0);                               // two generations ahead of the producer
    for (int k = 0; k < 5; k++) commit_oldest();
    rand_outcomes(4, q);
    boss_write(0, 0, 4, q);                    // outcomes of the skipped-over generation
    fetch_br(0);                               // must not be taken for the current one
    fetch_br(0);
    drain();
    check_state(0);

    // ---- long loop on channel 1: 300 iterations wrap around the 256 slots ----
    boss_open(1);
    for (int k0 = 0; k0 < 256; k0 += 16) begin
      rand_outcomes(16, q);
      boss_write(1, k0, 16, q);
    end
    for (int k = 0; k < 300; k++) begin
      if (k == 256) begin
        // strip-mined second part: iterations 256..299 reuse slots 0..43
        for (int k0 = 256; k0 < 300; k0 += 16) begin
          rand_outcomes((300 - k0 < 16) ? 300 - k0 : 16, q);
          boss_write(1, k0, q.size(), q);
        end
      end
      fetch_br(1);
      if (k % 5 == 0) fetch_br(0);     // channel 0 branch outside its loop: must not disturb
      drain();
      if (k % 37 == 0) check_state(1);
    end
    fetch_end(1);
    drain();
    check_state(1);

    // ---- record-and-replay on channel 2: one generation's outcomes replayed ----
    boss_open(2);
    for (int g = 0; g < 4; g++) begin
      rand_outcomes(4, q);
      for (int k = 0; k < 4; k++) fetch_br(2);
      fetch_end(2);
      drain();
      boss_write(2, 0, 4, q);          // recorded during this generation, used by the next
    end

    // ---- close ----
    boss_close(0);
    fetch_br(0);
    drain();
    check(active, "still active with channels 1 and 2 open");
    boss_close(1);
    boss_close(2);
    check(!active, "inactive once every channel is closed");
    fetch_br(1);
    drain();
    check_state(1);

    // ---- every mechanism must have happened ----
    $display("cycles=%0d hits=%0d late=%0d uncovered=%0d br_squash=%0d end_squash=%0d discard=%0d wrap_hits=%0d vector_writes=%0d removals=%0d closes=%0d readouts=%0d",
             n_cycles, n_hit, n_miss_late, n_miss_uncovered, n_br_squash, n_end_squash, n_discard,
             n_wrap_hit, n_vec_write, n_remove, n_close, n_readout);
    check(n_hit > 0,            "coverage: BOSS hit");
    check(n_miss_late > 0,      "coverage: outcome arrived too late");
    check(n_miss_uncovered > 0, "coverage: iteration not covered");
    check(n_br_squash > 0,      "coverage: target branch squashed");
    check(n_end_squash > 0,     "coverage: Loop-End squashed (stack pop)");
    check(n_discard > 0,        "coverage: previous generation discarded");
    check(n_wrap_hit > 0,       "coverage: iteration numbers wrapped");
    check(n_vec_write > 0,      "coverage: vector BOSS_write");
    check(n_remove > 0,         "coverage: outcome removed at commit");
    check(n_close > 0,          "coverage: BOSS_close");
    check(n_readout > 0,        "coverage: state readout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
