// boss_iter_stack -- per-channel stack of saved consumer iteration numbers.
//
// When the front end fetches a channel's Loop-End instruction, the consumer
// iteration number of the generation being left is pushed here before the
// iteration number is reset for the next generation. If that Loop-End instruction
// is later squashed, the value is popped and restored, so the front end resumes
// the old generation at the right iteration. DEPTH entries per channel (default 1,
// the depth the paper found sufficient). A push onto a full stack drops the oldest
// entry; a pop of an empty stack returns 0 and leaves it empty.
//
// Interface, per channel c: push[c] with push_val[c], pop[c], rst_ch[c] (empty the
// stack). top[c] is the value a pop returns in the same cycle (combinational from
// the registers). Priority within one channel: rst_ch, then pop, then push.
// Synchronous active-low reset.
//
// Push on Loop-End fetch and pop on Loop-End squash follow the paper; overflow and
// underflow behaviour and the reset are this design's choices.
module boss_iter_stack
  import boss_pkg::*;
#(
  parameter int unsigned N_CH  = NUM_CH,
  parameter int unsigned IT_W  = $clog2(NUM_ITERS),
  parameter int unsigned DEPTH = STACK_DEPTH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_CH-1:0]            push,
  input  logic [N_CH-1:0][IT_W-1:0]  push_val,
  input  logic [N_CH-1:0]            pop,
  input  logic [N_CH-1:0]            rst_ch,
  output logic [N_CH-1:0][IT_W-1:0]  top
);

  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic [N_CH-1:0][DEPTH-1:0][IT_W-1:0] stk_q;   // entry 0 is the top
  logic [N_CH-1:0][CNT_W-1:0]           cnt_q;   // number of live entries

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stk_q <= '0;
      cnt_q <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        if (rst_ch[c]) begin
          stk_q[c] <= '0;
          cnt_q[c] <= '0;
        end else if (pop[c]) begin
          for (int d = 0; d < int'(DEPTH) - 1; d++) stk_q[c][d] <= stk_q[c][d+1];
          stk_q[c][DEPTH-1] <= '0;
          if (cnt_q[c] != 0) cnt_q[c] <= cnt_q[c] - CNT_W'(1);
        end else if (push[c]) begin
          for (int d = int'(DEPTH) - 1; d > 0; d--) stk_q[c][d] <= stk_q[c][d-1];
          stk_q[c][0] <= push_val[c];
          if (cnt_q[c] != CNT_W'(DEPTH)) cnt_q[c] <= cnt_q[c] + CNT_W'(1);
        end
      end
    end
  end

  always_comb begin
    for (int c = 0; c < N_CH; c++) top[c] = (cnt_q[c] != 0) ? stk_q[c][0] : '0;
  end

endmodule
