// boss_state_readout -- answers loads from the BOSS address range.
//
// The BOSS state is only a set of hints, so the operating system may drop it on a
// context switch; software can still read it with ordinary loads, to find the
// open channels and save or inspect their state. Using the same map as the store
// decoder (channel c at BASE + c*CH_STRIDE):
//   offset 0 .. N_ITERS-1   the outcome entry of that iteration:
//                           bit 0 = outcome, bit 1 = valid
//   offset CFG_OFF          the channel status word:
//                           bits 7:0    consumer iter#
//                           bits 15:8   top of the iter# stack
//                           bits 16+    consumer gen# (GEN_W bits)
//                           bits 24+    producer gen# (GEN_W bits)
//                           bit 63      channel open
// Any other address in the range reads 0; ld_hit tells whether the address is in
// the range at all. The outcome entry is fetched from the outcome table through
// rd_ch/rd_iter. Purely combinational.
//
// That loads read the BOSS state follows the paper; what each load returns is
// this design's choice.
module boss_state_readout
  import boss_pkg::*;
#(
  parameter int unsigned N_CH    = NUM_CH,
  parameter int unsigned N_ITERS = NUM_ITERS,
  parameter int unsigned W_GEN   = GEN_W,
  parameter int unsigned W_ADDR  = ADDR_W,
  parameter logic [63:0] BASE    = BOSS_BASE,
  parameter int unsigned STRIDE  = CH_STRIDE,
  parameter int unsigned CFG_OFF = CFG_OFFSET,
  localparam int unsigned CH_W   = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned IT_W   = $clog2(N_ITERS)
) (
  input  logic [W_ADDR-1:0]          ld_addr,
  output logic                       ld_hit,
  output logic [63:0]                ld_data,
  // outcome table readout port
  output logic [CH_W-1:0]            rd_ch,
  output logic [IT_W-1:0]            rd_iter,
  input  logic [1:0]                 rd_entry,
  // channel state
  input  logic [N_CH-1:0]            open,
  input  logic [N_CH-1:0][IT_W-1:0]  cons_iter,
  input  logic [N_CH-1:0][IT_W-1:0]  stack_top,
  input  logic [N_CH-1:0][W_GEN-1:0] cons_gen,
  input  logic [N_CH-1:0][W_GEN-1:0] prod_gen
);

  localparam logic [W_ADDR-1:0] SPAN = W_ADDR'(N_CH) * W_ADDR'(STRIDE);

  logic [W_ADDR-1:0] rel;
  logic [W_ADDR-1:0] off;

  always_comb begin
    rel     = ld_addr - W_ADDR'(BASE);
    ld_hit  = (ld_addr >= W_ADDR'(BASE)) && (rel < SPAN);
    off     = rel % W_ADDR'(STRIDE);
    rd_ch   = CH_W'(rel / W_ADDR'(STRIDE));
    rd_iter = IT_W'(off);
    ld_data = '0;
    if (ld_hit) begin
      if (off < W_ADDR'(N_ITERS)) begin
        ld_data[1:0] = rd_entry;
      end else if (off == W_ADDR'(CFG_OFF)) begin
        ld_data[7:0]           = 8'(cons_iter[rd_ch]);
        ld_data[15:8]          = 8'(stack_top[rd_ch]);
        ld_data[16 +: W_GEN]   = cons_gen[rd_ch];
        ld_data[24 +: W_GEN]   = prod_gen[rd_ch];
        ld_data[63]            = open[rd_ch];
      end
    end
  end

endmodule
