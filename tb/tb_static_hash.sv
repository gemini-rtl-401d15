// tb_static_hash: checks the static mapping of leading blocks against an
// independent bit-by-bit XOR fold of {upper address bits, section offset},
// and checks that the 16 blocks of one section land on 16 distinct ways.
module tb_static_hash;
  import gemini_pkg::*;
  localparam int unsigned BLK_W = 28, SET_W = 20, OFF_W = 4;

  logic [BLK_W-1:0] blk;
  logic [POS_W-1:0] pos;
  int unsigned checks = 0, failures = 0;

  static_hash dut (.blk_addr(blk), .static_pos(pos));

  function automatic logic [3:0] ref_hash(logic [BLK_W-1:0] b);
    logic [3:0] r;
    r = b[3:0];                // offset in section
    r = r ^ b[27:24];          // the 4 bits above the 20-bit set index
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] seen;
    for (int n = 0; n < 2000; n++) begin
      blk = {$urandom, $urandom} % (1 << BLK_W);
      #1;
      checks++;
      if (pos !== ref_hash(blk)) begin
        failures++;
        $display("FAIL blk=%h pos=%0d exp=%0d", blk, pos, ref_hash(blk));
      end
    end
    // one section: all 16 offsets map to different ways
    seen = '0;
    for (int o = 0; o < 16; o++) begin
      blk = {4'hA, 20'h12345, 4'(o)};
      #1;
      seen[pos] = 1'b1;
    end
    checks++;
    if (seen !== 16'hFFFF) begin
      failures++;
      $display("FAIL section offsets collide: %h", seen);
    end
    // same offset, different sections of one set: spread over ways
    seen = '0;
    for (int u = 0; u < 16; u++) begin
      blk = {4'(u), 20'h00777, 4'd5};
      #1;
      seen[pos] = 1'b1;
    end
    checks++;
    if (seen !== 16'hFFFF) begin
      failures++;
      $display("FAIL sections sharing a set collide: %h", seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
