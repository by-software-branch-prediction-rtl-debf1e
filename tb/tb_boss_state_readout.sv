// tb_boss_state_readout -- loads from the BOSS range: random channel state and
// random load addresses (outcome bytes, configuration word, holes, outside the
// range), with a small outcome-table model answering the rd_ch/rd_iter port.
module tb_boss_state_readout;
  import boss_pkg::*;
  localparam logic [63:0] B = BOSS_BASE;
  localparam int NC = 4;
  logic [63:0] ld_addr, ld_data;
  logic ld_hit;
  logic [1:0] rd_ch;
  logic [7:0] rd_iter;
  logic [1:0] rd_entry;
  logic [NC-1:0] open;
  logic [NC-1:0][7:0] cons_iter, stack_top;
  logic [NC-1:0][0:0] cons_gen, prod_gen;
  logic [1:0] lut [NC][256];
  int checks = 0, failures = 0;

  boss_state_readout dut (.*);

  // outcome table model
  always_comb rd_entry = lut[rd_ch][rd_iter];

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
    foreach (lut[c, i]) lut[c][i] = 2'($urandom);
    for (int t = 0; t < 3000; t++) begin
      automatic longint r;
      automatic logic [63:0] e = '0;
      automatic bit e_hit;
      open = NC'($urandom);
      for (int c = 0; c < NC; c++) begin
        cons_iter[c] = 8'($urandom); stack_top[c] = 8'($urandom);
        cons_gen[c] = 1'($urandom);  prod_gen[c] = 1'($urandom);
      end
      ld_addr = B - 16 + 64'($urandom_range(0, 4 * 512 + 32));
      if ($urandom_range(0, 2) == 0) ld_addr = B + 64'(512 * $urandom_range(0, 3) + 256);
      #1;
      r = longint'(ld_addr) - longint'(B);
      e_hit = (r >= 0 && r < 4 * 512);
      if (e_hit) begin
        automatic int c = int'(r / 512), o = int'(r % 512);
        if (o < 256) e[1:0] = lut[c][o];
        else if (o == 256) begin
          e[7:0] = cons_iter[c]; e[15:8] = stack_top[c]; e[16] = cons_gen[c];
          e[24] = prod_gen[c];   e[63] = open[c];
        end
      end
      check(ld_hit == e_hit && ld_data == e, $sformatf("t=%0d addr %h hit %0b data %h want %0b %h", t, ld_addr, ld_hit, ld_data, e_hit, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
