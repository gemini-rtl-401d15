// static_hash: the static mapping of leading blocks (StaticMapping in the
// mapping policy, the HASH box of the leading-block victim selection).
//
// A leading block is placed at a fixed way of its set, given by a fixed hash
// of its block address, so that the controller can read it from the DRAM
// cache without consulting any tag. The original description only requires a
// "predetermined hash function of the block address"; the function chosen
// here is this design's own: the address tag of the block ({bits above the
// set index, offset inside the section}) is cut into POS_W-bit chunks, which
// are XORed together. Blocks of one section therefore get distinct positions,
// and blocks at the same offset of different sections sharing a set are
// spread over different ways.
//
// Address split of a block address blk (64-byte units):
//   blk = {upper, set index (SET_W bits), offset in section (OFF_W bits)}
// Interface: purely combinational, blk_addr in, static_pos out, no latency.
module static_hash
  import gemini_pkg::*;
#(
  parameter int unsigned BLK_W = 28,  // 16GB main memory / 64B blocks
  parameter int unsigned SET_W = 20,  // 1GB / (16 x 64B) sets
  parameter int unsigned OFF_W = 4    // 16-block (1KB) sections
) (
  input  logic [BLK_W-1:0] blk_addr,
  output logic [POS_W-1:0] static_pos
);
  localparam int unsigned UP_W   = BLK_W - SET_W - OFF_W;
  localparam int unsigned KEY_W  = UP_W + OFF_W;
  localparam int unsigned CHUNKS = (KEY_W + POS_W - 1) / POS_W;

  logic [CHUNKS*POS_W-1:0] key;

  always_comb begin
    key = '0;
    key[KEY_W-1:0] = {blk_addr[BLK_W-1 -: UP_W], blk_addr[OFF_W-1:0]};
    static_pos = '0;
    for (int unsigned i = 0; i < CHUNKS; i++) begin
      static_pos = static_pos ^ key[i*POS_W +: POS_W];
    end
  end
endmodule
