// tb_boss_mmio_decode -- decoding of committed stores: directed cases for the
// configuration word (open with positive and negative PC offsets, close, partial
// configuration stores), vector and scalar outcome stores including one that runs
// past the end of the outcome block, and stores outside the range; then random
// stores against a reference decoder.
module tb_boss_mmio_decode;
  import boss_pkg::*;
  localparam logic [63:0] B = BOSS_BASE;
  logic st_valid;
  logic [63:0] st_addr, st_pc, br_pc, end_pc;
  logic [127:0] st_data;
  logic [15:0] st_be, lane_en, lane_outcome;
  boss_op_e op;
  logic [1:0] ch;
  logic [7:0] iter;
  int checks = 0, failures = 0;

  boss_mmio_decode dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic drive(logic [63:0] a, logic [127:0] d, logic [15:0] be, logic [63:0] pc);
    st_valid = 1; st_addr = a; st_data = d; st_be = be; st_pc = pc;
    #1;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // BOSS_open on channel 2: branch at +0x40, Loop-End at -0x20 from the store
    drive(B + 2*512 + 256, {64'h0, 32'hFFFF_FFE0, 32'h0000_0040}, 16'h00FF, 64'h4000_1000);
    check(op == OP_OPEN && ch == 2, "open decoded");
    check(br_pc == 64'h4000_1040 && end_pc == 64'h4000_0FE0, $sformatf("open PCs %h %h", br_pc, end_pc));
    // BOSS_close on channel 3
    drive(B + 3*512 + 256, 128'h0, 16'h00FF, 64'h4000_2000);
    check(op == OP_CLOSE && ch == 3, "close decoded");
    // 4-byte store to the configuration word is not a configuration
    drive(B + 256, 128'h1, 16'h000F, 64'h0);
    check(op == OP_NONE, "partial config store ignored");
    // configuration store not valid
    st_valid = 0; st_addr = B + 256; st_be = 16'h00FF; st_data = 128'h1; #1;
    check(op == OP_NONE, "invalid store ignored");
    // vector BOSS_write of 16 outcomes at channel 1 iteration 32
    drive(B + 512 + 32, {8{16'h0100}}, 16'hFFFF, 64'h0);
    check(op == OP_WRITE && ch == 1 && iter == 32 && lane_en == 16'hFFFF && lane_outcome == 16'hAAAA,
          $sformatf("vector write: op %s ch %0d it %0d en %h out %h", op.name(), ch, iter, lane_en, lane_outcome));
    // vector store at iteration 250: only lanes 0..5 are outcomes
    drive(B + 250, {16{8'h01}}, 16'hFFFF, 64'h0);
    check(op == OP_WRITE && ch == 0 && iter == 250 && lane_en == 16'h003F, $sformatf("clipped write en %h", lane_en));
    // scalar byte store, not taken
    drive(B + 3*512 + 7, 128'h0, 16'h0001, 64'h0);
    check(op == OP_WRITE && ch == 3 && iter == 7 && lane_en == 16'h0001 && lane_outcome[0] == 0, "scalar write");
    // below and above the range
    drive(B - 1, 128'h1, 16'h0001, 64'h0);
    check(op == OP_NONE, "below range");
    drive(B + 4*512, 128'h1, 16'h0001, 64'h0);
    check(op == OP_NONE, "above range");
    // gap between the configuration word and the next channel
    drive(B + 300, 128'h1, 16'h0001, 64'h0);
    check(op == OP_NONE, "hole in the map");

    // random stores near the range
    for (int t = 0; t < 3000; t++) begin
      automatic logic [63:0] a = B - 64 + 64'($urandom_range(0, 4 * 512 + 128));
      automatic logic [127:0] d = {$urandom, $urandom, $urandom, $urandom};
      automatic logic [15:0] be = ($urandom_range(0, 3) == 0) ? 16'h00FF : 16'($urandom);
      automatic boss_op_e e_op = OP_NONE;
      automatic logic [15:0] e_en = '0;
      automatic longint r = longint'(a) - longint'(B);
      if ($urandom_range(0, 3) == 0) a = B + 64'(512 * $urandom_range(0, 3) + 256);
      r = longint'(a) - longint'(B);
      drive(a, d, be, 64'h4000_0000);
      if (r >= 0 && r < 4 * 512) begin
        automatic int o = int'(r % 512);
        if (o < 256) begin
          for (int l = 0; l < 16; l++) e_en[l] = be[l] && (o + l < 256);
          if (e_en != 0) e_op = OP_WRITE;
          if (e_op == OP_WRITE) begin
            check(ch == 2'(r / 512) && iter == 8'(o), $sformatf("t=%0d write address", t));
            for (int l = 0; l < 16; l++)
              if (e_en[l]) check(lane_outcome[l] == d[8*l], $sformatf("t=%0d lane %0d", t, l));
          end
        end else if (o == 256 && be == 16'h00FF) begin
          e_op = (d[63:0] == 0) ? OP_CLOSE : OP_OPEN;
          if (e_op == OP_OPEN)
            check(br_pc == 64'h4000_0000 + {{32{d[31]}}, d[31:0]} &&
                  end_pc == 64'h4000_0000 + {{32{d[63]}}, d[63:32]}, $sformatf("t=%0d open PCs", t));
        end
      end
      check(op == e_op && lane_en == e_en, $sformatf("t=%0d addr %h op %s want %s en %h want %h", t, a, op.name(), e_op.name(), lane_en, e_en));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
