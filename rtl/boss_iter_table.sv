// boss_iter_table -- consumer iteration-number table.
//
// For every channel it holds the iteration number that the next fetched instance
// of the target branch will look up in the outcome table. A fetched target branch
// increments it, a squashed one decrements it, a fetched Loop-End instruction
// resets it to 0 (a new generation starts at iteration 0) and a squashed Loop-End
// instruction reloads the value saved on the iter# stack. BOSS_open/BOSS_close
// also reset it. The value is IT_W bits and wraps, so iteration numbers above
// 2**IT_W-1 reuse the same outcome slots, as the software interface does.
//
// Interface: op[c] (boss_pkg::cnt_op_e) and load_val[c] per channel; val[c] is the
// registered value, updated at the rising edge. Synchronous active-low reset.
//
// Increment, decrement and reset follow the paper; the reload from the stack is how
// this design carries out the pop it describes.
module boss_iter_table
  import boss_pkg::*;
#(
  parameter int unsigned N_CH = NUM_CH,
  parameter int unsigned IT_W = $clog2(NUM_ITERS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  cnt_op_e [N_CH-1:0]         op,
  input  logic    [N_CH-1:0][IT_W-1:0] load_val,
  output logic    [N_CH-1:0][IT_W-1:0] val
);

  logic [N_CH-1:0][IT_W-1:0] val_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      val_q <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        unique case (op[c])
          CNT_INC:  val_q[c] <= val_q[c] + IT_W'(1);
          CNT_DEC:  val_q[c] <= val_q[c] - IT_W'(1);
          CNT_RST:  val_q[c] <= '0;
          CNT_LOAD: val_q[c] <= load_val[c];
          default:  ;
        endcase
      end
    end
  end

  assign val = val_q;

endmodule
