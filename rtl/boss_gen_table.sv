// boss_gen_table -- per-channel generation-number table.
//
// A generation is one run of the loop that holds the target branch (one iteration
// of the enclosing outer loop). Two instances of this table exist in the BOSS unit:
// the producer table, which advances when the channel's Loop-End instruction
// commits, and the consumer table, which advances when the Loop-End instruction is
// fetched and steps back when it is squashed. Both reset when the channel is
// (re)configured. The counter is GEN_W bits wide and wraps; with the default of one
// bit it tells two generations apart, so increment and decrement both toggle it.
//
// Interface: one operation per channel per cycle (op[c], a boss_pkg::cnt_op_e:
// HOLD, INC, DEC or RST; LOAD is treated as HOLD). val[c] is the registered value,
// updated at the rising clock edge. Synchronous active-low reset clears all
// entries.
//
// The table's operations and its one-bit width follow the paper; reset behaviour is
// this design's choice.
module boss_gen_table
  import boss_pkg::*;
#(
  parameter int unsigned N_CH = NUM_CH,
  parameter int unsigned W    = GEN_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cnt_op_e [N_CH-1:0]      op,
  output logic    [N_CH-1:0][W-1:0] val
);

  logic [N_CH-1:0][W-1:0] val_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      val_q <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        unique case (op[c])
          CNT_INC: val_q[c] <= val_q[c] + W'(1);
          CNT_DEC: val_q[c] <= val_q[c] - W'(1);
          CNT_RST: val_q[c] <= '0;
          default: ;
        endcase
      end
    end
  end

  assign val = val_q;

endmodule
