// boss_pc_table -- associatively searched table of one PC per BOSS channel.
//
// The BOSS unit holds two of these: the Branch-PC table with the PC of each
// channel's target branch and the Loop-End PC table with the PC of the
// instruction that follows the target loop. A BOSS_open writes the channel's entry
// and marks it valid; a BOSS_close invalidates it. Every cycle the table is
// searched with N_SRCH PCs at once (in the BOSS unit: the fetched, the squashed
// and the committed instruction's PC). Each search port reports whether a valid
// entry holds its PC and which channel it is; when several channels hold the same
// PC the lowest-numbered one is reported.
//
// Interface: wr_en/wr_ch/wr_pc and clr_en/clr_ch update the table at the rising
// edge (clr wins if both name the same channel). srch_valid/srch_pc ->
// srch_hit/srch_ch are combinational. open[c] is the valid bit of channel c.
// Synchronous active-low reset invalidates every entry.
//
// One PC per channel and the associative search follow the paper; the priority
// among equal PCs and the reset are this design's choices.
module boss_pc_table
  import boss_pkg::*;
#(
  parameter int unsigned N_CH   = NUM_CH,
  parameter int unsigned W_PC   = PC_W,
  parameter int unsigned N_SRCH = 3,
  localparam int unsigned CH_W  = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           wr_en,
  input  logic [CH_W-1:0]                wr_ch,
  input  logic [W_PC-1:0]                wr_pc,
  input  logic                           clr_en,
  input  logic [CH_W-1:0]                clr_ch,
  input  logic [N_SRCH-1:0]              srch_valid,
  input  logic [N_SRCH-1:0][W_PC-1:0]    srch_pc,
  output logic [N_SRCH-1:0]              srch_hit,
  output logic [N_SRCH-1:0][CH_W-1:0]    srch_ch,
  output logic [N_CH-1:0]                open
);

  logic [N_CH-1:0]           vld_q;
  logic [N_CH-1:0][W_PC-1:0] pc_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_q <= '0;
      pc_q  <= '0;
    end else begin
      if (wr_en) begin
        vld_q[wr_ch] <= 1'b1;
        pc_q[wr_ch]  <= wr_pc;
      end
      if (clr_en) vld_q[clr_ch] <= 1'b0;
    end
  end

  // Associative search: compare every entry, keep the lowest matching channel.
  always_comb begin
    for (int s = 0; s < N_SRCH; s++) begin
      srch_hit[s] = 1'b0;
      srch_ch[s]  = '0;
      for (int c = N_CH - 1; c >= 0; c--) begin
        if (srch_valid[s] && vld_q[c] && pc_q[c] == srch_pc[s]) begin
          srch_hit[s] = 1'b1;
          srch_ch[s]  = CH_W'(c);
        end
      end
    end
  end

  assign open = vld_q;

endmodule
