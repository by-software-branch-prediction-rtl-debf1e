// tb_boss_outcome_lut -- random traffic on the outcome table at its default size
// (4 channels x 256 entries, 16-lane writes) against a reference model: vector
// writes that may wrap past iteration 255, generation changes that must discard
// the old contents, removals with matching and stale generation tags, channel
// clears, lookups and raw readouts. Lookups are checked combinationally before
// each edge.
module tb_boss_outcome_lut;
  localparam int NC = 4, NI = 256, NL = 16;
  logic clk = 0, rst_n = 0;
  logic wr_en, clr_en, lk_en, rm_en, lk_hit, lk_outcome;
  logic [1:0] wr_ch, clr_ch, lk_ch, rm_ch, rd_ch;
  logic [7:0] wr_iter, lk_iter, rm_iter, rd_iter;
  logic [NL-1:0] wr_lane_en, wr_lane_outcome;
  logic [0:0] wr_gen, lk_gen, rm_gen;
  logic [1:0] rd_entry;

  bit m_v [NC][NI];
  bit m_o [NC][NI];
  bit m_tag [NC];
  int checks = 0, failures = 0;
  int n_discard = 0, n_hit = 0, n_rm = 0;

  boss_outcome_lut dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit prod_gen [NC];
    wr_en = 0; clr_en = 0; lk_en = 0; rm_en = 0;
    wr_ch = 0; clr_ch = 0; lk_ch = 0; rm_ch = 0; rd_ch = 0;
    wr_iter = 0; lk_iter = 0; rm_iter = 0; rd_iter = 0;
    wr_lane_en = 0; wr_lane_outcome = 0; wr_gen = 0; lk_gen = 0; rm_gen = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (m_tag[c]) begin m_tag[c] = 0; prod_gen[c] = 0; end
    foreach (m_v[c, i]) begin m_v[c][i] = 0; m_o[c][i] = 0; end
    for (int t = 0; t < 8000; t++) begin
      @(negedge clk);
      // occasionally advance a producer generation
      if ($urandom_range(0, 40) == 0) begin
        automatic int c = $urandom_range(0, NC - 1);
        prod_gen[c] = !prod_gen[c];
      end
      wr_en  = ($urandom_range(0, 2) == 0);
      wr_ch  = 2'($urandom);
      wr_iter = 8'($urandom);
      wr_lane_en = NL'($urandom);
      wr_lane_outcome = NL'($urandom);
      wr_gen = prod_gen[wr_ch];
      rm_en  = ($urandom_range(0, 2) == 0);
      rm_ch  = 2'($urandom);
      rm_gen = ($urandom_range(0, 3) == 0) ? !m_tag[rm_ch] : m_tag[rm_ch];
      rm_iter = 8'($urandom);
      clr_en = ($urandom_range(0, 150) == 0);
      clr_ch = 2'($urandom);
      lk_en  = ($urandom_range(0, 7) != 0);
      lk_ch  = 2'($urandom);
      lk_gen = ($urandom_range(0, 4) == 0) ? !m_tag[lk_ch] : m_tag[lk_ch];
      lk_iter = 8'($urandom);
      rd_ch  = 2'($urandom);
      rd_iter = 8'($urandom);
      #1;
      begin
        automatic bit exp_hit = lk_en && m_v[lk_ch][lk_iter] && (m_tag[lk_ch] == lk_gen);
        check(lk_hit == exp_hit, $sformatf("t=%0d lookup ch%0d it%0d hit %0b want %0b", t, lk_ch, lk_iter, lk_hit, exp_hit));
        if (exp_hit) begin
          n_hit++;
          check(lk_outcome == m_o[lk_ch][lk_iter], $sformatf("t=%0d outcome", t));
        end
        check(rd_entry[1] == m_v[rd_ch][rd_iter], $sformatf("t=%0d readout valid", t));
        if (m_v[rd_ch][rd_iter]) check(rd_entry[0] == m_o[rd_ch][rd_iter], $sformatf("t=%0d readout outcome", t));
      end
      // model update: removal, then write (with discard), then clear
      if (rm_en && m_tag[rm_ch] == rm_gen) begin
        if (m_v[rm_ch][rm_iter]) n_rm++;
        m_v[rm_ch][rm_iter] = 0;
      end
      if (wr_en) begin
        if (wr_gen != m_tag[wr_ch]) begin
          n_discard++;
          for (int i = 0; i < NI; i++) m_v[wr_ch][i] = 0;
          m_tag[wr_ch] = wr_gen;
        end
        for (int l = 0; l < NL; l++)
          if (wr_lane_en[l]) begin
            m_v[wr_ch][(wr_iter + l) % NI] = 1;
            m_o[wr_ch][(wr_iter + l) % NI] = wr_lane_outcome[l];
          end
      end
      if (clr_en) begin
        for (int i = 0; i < NI; i++) m_v[clr_ch][i] = 0;
        m_tag[clr_ch] = 0;
      end
    end
    check(n_discard > 0 && n_hit > 0 && n_rm > 0, "coverage: discard, hit and removal all seen");
    $display("hits=%0d removals=%0d discards=%0d", n_hit, n_rm, n_discard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
