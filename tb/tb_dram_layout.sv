// tb_dram_layout: checks the DRAM-cache placement. Every (set, way) of the
// full 1M-set cache maps to a distinct data location and every set to a
// distinct tag location (checked on a sample by hashing into a table),
// the tag of a set is never in the bank of its data, data and tag rows do
// not overlap, and a few locations are compared with values worked out by
// hand from the interleaving rule.
module tb_dram_layout;
  import gemini_pkg::*;
  localparam int unsigned SET_W = 20;
  logic [SET_W-1:0] set_idx;
  logic [POS_W-1:0] way;
  dram_loc_t        data_loc, tag_loc;
  int unsigned checks = 0, failures = 0;

  dram_layout dut (.*);

  bit seen_data [dram_loc_t];
  bit seen_tag  [dram_loc_t];

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_loc(input dram_loc_t got, input int ch, input int bk, input int row,
                            input int col, input string what);
    checks++;
    if (got.channel != ch || got.bank != bk || got.row != row || got.col != col) begin
      failures++;
      $display("FAIL %s: ch%0d bk%0d row%0d col%0d, expected ch%0d bk%0d row%0d col%0d",
               what, got.channel, got.bank, got.row, got.col, ch, bk, row, col);
    end
  endtask

  initial begin
    // hand-worked: set 0 way 0 -> data ch0 bk0 row0 col0, tag ch0 bk8 row 8192 col0
    set_idx = 0; way = 0; #1;
    expect_loc(data_loc, 0, 0, 0, 0, "set0 data");
    expect_loc(tag_loc, 0, 8, 8192, 0, "set0 tag");
    // set 1 way 5 -> second set of the same row: col 16+5; tag col 1
    set_idx = 1; way = 5; #1;
    expect_loc(data_loc, 0, 0, 0, 21, "set1 data");
    expect_loc(tag_loc, 0, 8, 8192, 1, "set1 tag");
    // set 2 -> next data row index 1 -> channel 1
    set_idx = 2; way = 0; #1;
    expect_loc(data_loc, 1, 0, 0, 0, "set2 data");
    // set 8 -> data row index 4 -> channel 0 bank 1
    set_idx = 8; way = 15; #1;
    expect_loc(data_loc, 0, 1, 0, 15, "set8 data");
    expect_loc(tag_loc, 0, 9, 8192, 0, "set8 tag");
    // set 128 -> data row index 64 -> ch0 bk0 row1; tag k = 2 -> col 2
    set_idx = 128; way = 3; #1;
    expect_loc(data_loc, 0, 0, 1, 3, "set128 data");
    expect_loc(tag_loc, 0, 8, 8192, 2, "set128 tag");
    // last set -> last data row 8191 of ch3 bk15; tag row 8192 + 16383/32
    set_idx = '1; way = 15; #1;
    expect_loc(data_loc, 3, 15, 8191, 31, "last set data");
    expect_loc(tag_loc, 3, 7, 8192 + 511, 31, "last set tag");

    // sample of sets: uniqueness and bank separation
    for (int n = 0; n < 40000; n++) begin
      set_idx = (n < 20000) ? SET_W'(n) : SET_W'($urandom);
      way     = 4'($urandom);
      #1;
      checks++;
      if (tag_loc.bank == data_loc.bank || tag_loc.channel != data_loc.channel
          || data_loc.row >= 8192 || tag_loc.row < 8192 || tag_loc.row >= 8192 + 512) begin
        failures++;
        $display("FAIL set %0d: data bk%0d row%0d tag bk%0d row%0d", set_idx,
                 data_loc.bank, data_loc.row, tag_loc.bank, tag_loc.row);
      end
      if (n < 20000) begin
        checks++;
        if (seen_data.exists(data_loc) || seen_tag.exists(tag_loc)) begin
          failures++;
          $display("FAIL set %0d way %0d: location reused", set_idx, way);
        end
        seen_data[data_loc] = 1'b1;
        seen_tag[tag_loc]   = 1'b1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
