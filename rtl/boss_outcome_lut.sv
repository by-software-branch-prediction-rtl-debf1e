// boss_outcome_lut -- the Branch Outcomes lookup table of the BOSS unit.
//
// For each channel it stores N_ITERS two-bit entries <valid, outcome>, one per
// iteration number of the target loop, plus a GEN_W-bit tag naming the generation
// the channel's contents belong to. Only one generation is kept per channel; the
// generation part of the <channel, generation, iteration> address is matched
// against the tag.
//
//  * Write (a committed BOSS_write, up to N_LANES outcome bytes from one vector
//    store): lane i writes iteration wr_iter+i (modulo N_ITERS). If wr_gen, the
//    producer generation of the channel, differs from the tag, the store is the
//    first of a new generation: every entry of the channel is invalidated and the
//    tag takes wr_gen, in the same cycle as the new lanes are written.
//  * Lookup (fetch of a target branch): hit when the entry is valid and the tag
//    equals the consumer generation lk_gen. Combinational.
//  * Remove (commit of a target branch): the entry the branch was looked up with,
//    named by rm_gen/rm_iter, is invalidated if the tag still equals rm_gen.
//  * Clear (BOSS_open/BOSS_close): all entries of the channel invalid, tag 0.
//  * Readout: rd_entry is the raw <valid, outcome> of rd_ch/rd_iter, for loads
//    that read the BOSS state.
// Updates take effect at the rising edge; in one cycle a clear overrides a write,
// which overrides a removal. Synchronous active-low reset.
//
// The two-bit entries, the lookup, write, removal and discard rules follow the
// paper; the per-channel generation tag is how this design keeps one generation
// per channel in the paper's 2 bits per entry.
module boss_outcome_lut
  import boss_pkg::*;
#(
  parameter int unsigned N_CH    = NUM_CH,
  parameter int unsigned N_ITERS = NUM_ITERS,
  parameter int unsigned W_GEN   = GEN_W,
  parameter int unsigned N_LANES = ST_BYTES,
  localparam int unsigned CH_W   = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned IT_W   = $clog2(N_ITERS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // producer side
  input  logic                wr_en,
  input  logic [CH_W-1:0]     wr_ch,
  input  logic [IT_W-1:0]     wr_iter,
  input  logic [N_LANES-1:0]  wr_lane_en,
  input  logic [N_LANES-1:0]  wr_lane_outcome,
  input  logic [W_GEN-1:0]    wr_gen,
  input  logic                clr_en,
  input  logic [CH_W-1:0]     clr_ch,
  // consumer side
  input  logic                lk_en,
  input  logic [CH_W-1:0]     lk_ch,
  input  logic [W_GEN-1:0]    lk_gen,
  input  logic [IT_W-1:0]     lk_iter,
  output logic                lk_hit,
  output logic                lk_outcome,
  input  logic                rm_en,
  input  logic [CH_W-1:0]     rm_ch,
  input  logic [W_GEN-1:0]    rm_gen,
  input  logic [IT_W-1:0]     rm_iter,
  // state readout
  input  logic [CH_W-1:0]     rd_ch,
  input  logic [IT_W-1:0]     rd_iter,
  output logic [1:0]          rd_entry
);

  logic [N_CH-1:0][N_ITERS-1:0] valid_q;
  logic [N_CH-1:0][N_ITERS-1:0] outc_q;
  logic [N_CH-1:0][W_GEN-1:0]   tag_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= '0;
      outc_q  <= '0;
      tag_q   <= '0;
    end else begin
      if (rm_en && tag_q[rm_ch] == rm_gen) valid_q[rm_ch][rm_iter] <= 1'b0;
      if (wr_en) begin
        if (wr_gen != tag_q[wr_ch]) begin
          valid_q[wr_ch] <= '0;          // discard what is left of the old generation
          tag_q[wr_ch]   <= wr_gen;
        end
        for (int i = 0; i < N_LANES; i++) begin
          if (wr_lane_en[i]) begin
            valid_q[wr_ch][IT_W'(wr_iter + IT_W'(i))] <= 1'b1;
            outc_q[wr_ch][IT_W'(wr_iter + IT_W'(i))]  <= wr_lane_outcome[i];
          end
        end
      end
      if (clr_en) begin
        valid_q[clr_ch] <= '0;
        tag_q[clr_ch]   <= '0;
      end
    end
  end

  always_comb begin
    lk_hit     = lk_en && valid_q[lk_ch][lk_iter] && (tag_q[lk_ch] == lk_gen);
    lk_outcome = outc_q[lk_ch][lk_iter];
    rd_entry   = {valid_q[rd_ch][rd_iter], outc_q[rd_ch][rd_iter]};
  end

endmodule
