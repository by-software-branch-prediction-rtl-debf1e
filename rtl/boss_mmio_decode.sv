// boss_mmio_decode -- decodes committed stores that target the BOSS address range.
//
// Software talks to the BOSS unit with ordinary stores, so no new instructions are
// needed. Each channel c owns CH_STRIDE bytes at BASE + c*CH_STRIDE:
//   offset 0 .. N_ITERS-1       one byte per iteration number; bit 0 is the
//                               outcome (1 = taken). Storing it is a BOSS_write.
//                               A vector store of up to N_LANES bytes passes as
//                               many outcomes in one go.
//   offset CFG_OFF .. +7        the 8-byte configuration word. Bits 31:0 hold the
//                               signed byte distance from the configuring store
//                               to the target branch, bits 63:32 the distance to
//                               the Loop-End instruction. Storing a non-zero word
//                               is a BOSS_open, storing zero a BOSS_close.
// A BOSS_write reports the channel, the iteration number of byte lane 0 and the
// lanes that carry outcomes (enabled bytes that fall inside the outcome block;
// lanes past its end are dropped). A BOSS_open reports the two absolute PCs. A
// configuration store must be one aligned 8-byte store (byte enables 7:0 all set,
// the rest clear); any other store into the range, or outside it, decodes as
// OP_NONE.
//
// Purely combinational. The 8-byte configuration and 256-byte outcome areas per
// channel and the relative PCs follow the paper; the base address, the channel
// stride, the word layout, the close encoding and the store width are this
// design's choices.
module boss_mmio_decode
  import boss_pkg::*;
#(
  parameter int unsigned N_CH      = NUM_CH,
  parameter int unsigned N_ITERS   = NUM_ITERS,
  parameter int unsigned N_LANES   = ST_BYTES,
  parameter int unsigned W_PC      = PC_W,
  parameter int unsigned W_ADDR    = ADDR_W,
  parameter logic [63:0] BASE      = BOSS_BASE,
  parameter int unsigned STRIDE    = CH_STRIDE,
  parameter int unsigned CFG_OFF   = CFG_OFFSET,
  localparam int unsigned CH_W     = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned IT_W     = $clog2(N_ITERS)
) (
  input  logic                      st_valid,
  input  logic [W_ADDR-1:0]         st_addr,
  input  logic [W_PC-1:0]           st_pc,
  input  logic [8*N_LANES-1:0]      st_data,
  input  logic [N_LANES-1:0]        st_be,
  output boss_op_e                  op,
  output logic [CH_W-1:0]           ch,
  output logic [IT_W-1:0]           iter,
  output logic [N_LANES-1:0]        lane_en,
  output logic [N_LANES-1:0]        lane_outcome,
  output logic [W_PC-1:0]           br_pc,
  output logic [W_PC-1:0]           end_pc
);

  localparam logic [W_ADDR-1:0] SPAN = W_ADDR'(N_CH) * W_ADDR'(STRIDE);

  logic [W_ADDR-1:0] rel;
  logic [W_ADDR-1:0] off;
  logic              in_range;
  logic [63:0]       cfg_word;

  always_comb begin
    rel      = st_addr - W_ADDR'(BASE);
    in_range = st_valid && (st_addr >= W_ADDR'(BASE)) && (rel < SPAN);
    off      = rel % W_ADDR'(STRIDE);
    ch       = CH_W'(rel / W_ADDR'(STRIDE));
    iter     = IT_W'(off);
    cfg_word = st_data[63:0];

    for (int i = 0; i < N_LANES; i++) begin
      lane_outcome[i] = st_data[8*i];
      lane_en[i]      = st_be[i] && (off + W_ADDR'(i) < W_ADDR'(N_ITERS));
    end

    br_pc  = st_pc + W_PC'(signed'(cfg_word[31:0]));
    end_pc = st_pc + W_PC'(signed'(cfg_word[63:32]));

    op = OP_NONE;
    if (in_range) begin
      if (off < W_ADDR'(N_ITERS)) begin
        if (lane_en != '0) op = OP_WRITE;
      end else if (off == W_ADDR'(CFG_OFF) && st_be == N_LANES'(8'hFF)) begin
        op = (cfg_word == '0) ? OP_CLOSE : OP_OPEN;
      end
    end
    if (op != OP_WRITE) lane_en = '0;
  end

endmodule
