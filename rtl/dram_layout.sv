// dram_layout: placement of data lines and tag batches in the DRAM cache.
//
// Tags and data live in separate DRAM rows, and the tag row of a set sits in
// a different bank from the set's data row, so that a leading block and its
// tag batch can be read concurrently. With 4-byte tags and 64-byte lines the
// tag rows are 1/16 of the data rows. Those points follow the described cache
// layout; the exact interleaving below is this design's own.
//
//   Data: a 2KB row holds SETS_PER_ROW = 2 sets of 16 lines. Consecutive data
//   rows are interleaved over channels first, then banks:
//     r = set / SETS_PER_ROW, channel = r % CHANNELS,
//     bank = (r / CHANNELS) % BANKS, row = r / (CHANNELS*BANKS),
//     col = (set % SETS_PER_ROW) * 16 + way
//   Tags: same channel as the data, bank = data bank XOR BANKS/2 (the other
//   half of the banks), placed in the rows above the data rows of that bank;
//   a 2KB tag row holds 32 tag batches:
//     k = row * SETS_PER_ROW + set % SETS_PER_ROW,
//     tag row = DATA_ROWS + k / 32, tag col = k % 32
// Interface: purely combinational.
module dram_layout
  import gemini_pkg::*;
#(
  parameter int unsigned SET_W     = 20,    // 1M sets (1GB of data lines)
  parameter int unsigned CHANNELS  = 4,
  parameter int unsigned BANKS     = 16,
  parameter int unsigned ROW_BYTES = 2048
) (
  input  logic [SET_W-1:0] set_idx,
  input  logic [POS_W-1:0] way,
  output dram_loc_t        data_loc,
  output dram_loc_t        tag_loc
);
  localparam int unsigned SETS_PER_ROW  = ROW_BYTES / (WAYS * 64);
  localparam int unsigned BATCH_PER_ROW = ROW_BYTES / 64;
  localparam int unsigned SPR_W = $clog2(SETS_PER_ROW);
  localparam int unsigned CH_W  = $clog2(CHANNELS);
  localparam int unsigned BK_W  = $clog2(BANKS);
  localparam int unsigned BPR_W = $clog2(BATCH_PER_ROW);
  localparam int unsigned DATA_ROWS = (1 << SET_W) / (SETS_PER_ROW * CHANNELS * BANKS);

  logic [SET_W-1:0] r;
  logic [SET_W-1:0] drow;
  logic [SET_W-1:0] k;

  always_comb begin
    r    = set_idx >> SPR_W;
    drow = r >> (CH_W + BK_W);

    data_loc         = '0;
    data_loc.channel = 4'(32'(r) % CHANNELS);
    data_loc.bank    = 5'((32'(r) >> CH_W) % BANKS);
    data_loc.row     = 18'(drow);
    data_loc.col     = 5'((32'(set_idx) % SETS_PER_ROW) * WAYS + 32'(way));

    k = (drow << SPR_W) | SET_W'(32'(set_idx) % SETS_PER_ROW);
    tag_loc         = '0;
    tag_loc.channel = data_loc.channel;
    tag_loc.bank    = data_loc.bank ^ 5'(BANKS / 2);
    tag_loc.row     = 18'(DATA_ROWS + (32'(k) >> BPR_W));
    tag_loc.col     = 5'(32'(k) % BATCH_PER_ROW);
  end
endmodule
