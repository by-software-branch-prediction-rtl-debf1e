// tb_boss_pc_table -- random BOSS_open / BOSS_close updates and three search ports
// on the PC table, against a reference model. PCs are drawn from a small pool so
// that searches hit often and several channels sometimes share a PC (lowest
// channel wins).
module tb_boss_pc_table;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  logic wr_en, clr_en;
  logic [1:0] wr_ch, clr_ch;
  logic [63:0] wr_pc;
  logic [2:0] srch_valid, srch_hit;
  logic [2:0][63:0] srch_pc;
  logic [2:0][1:0] srch_ch;
  logic [NC-1:0] open;
  bit m_v [NC];
  logic [63:0] m_pc [NC];
  int checks = 0, failures = 0;

  boss_pc_table dut (.*);

  always #5 clk = ~clk;

  function automatic logic [63:0] rand_pc();
    return 64'h0000_4000_0000_1000 + 64'(4 * $urandom_range(0, 7));
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; clr_en = 0; wr_ch = 0; clr_ch = 0; wr_pc = 0; srch_valid = 0; srch_pc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (m_v[c]) m_v[c] = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      for (int s = 0; s < 3; s++) begin
        srch_valid[s] = ($urandom_range(0, 7) != 0);
        srch_pc[s]    = rand_pc();
      end
      #1;
      for (int s = 0; s < 3; s++) begin
        automatic bit hit = 0;
        automatic int ch = 0;
        for (int c = 0; c < NC; c++)
          if (!hit && srch_valid[s] && m_v[c] && m_pc[c] == srch_pc[s]) begin hit = 1; ch = c; end
        checks++;
        if (srch_hit[s] != hit || (hit && srch_ch[s] != 2'(ch))) begin
          failures++;
          $display("FAIL t=%0d port %0d hit %0b ch %0d want %0b %0d", t, s, srch_hit[s], srch_ch[s], hit, ch);
        end
      end
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (open[c] != m_v[c]) begin failures++; $display("FAIL open ch %0d", c); end
      end
      wr_en  = ($urandom_range(0, 3) == 0);
      wr_ch  = 2'($urandom);
      wr_pc  = rand_pc();
      clr_en = ($urandom_range(0, 5) == 0);
      clr_ch = 2'($urandom);
      if (wr_en) begin m_v[wr_ch] = 1; m_pc[wr_ch] = wr_pc; end
      if (clr_en) m_v[clr_ch] = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
