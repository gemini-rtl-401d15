// tb_tag_cache: checks the SRAM tag cache against a reference model of a
// set-associative store with the same replacement rule (first invalid way,
// else the way after the last fill). Each lookup must answer exactly LAT
// cycles after it was issued, with the right hit, way, batch and hand, and on
// a miss with the right victim way, victim set and victim batch. A burst of
// back-to-back lookups checks that one lookup per cycle is accepted.
module tb_tag_cache;
  import gemini_pkg::*;
  localparam int unsigned SET_W = 8, ENTRIES = 16, TC_WAYS = 4, LAT = 9;
  localparam int unsigned TC_SETS = ENTRIES / TC_WAYS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             lu_valid, rsp_valid, rsp_hit, rsp_vic_valid, rsp_vic_dirty;
  logic [SET_W-1:0] lu_set, rsp_vic_set, wr_set;
  logic [1:0]       rsp_way, rsp_vic_way, wr_way;
  batch_t           rsp_batch, rsp_vic_batch, wr_batch;
  logic [POS_W-1:0] rsp_hand, wr_hand;
  logic             wr_valid, wr_fill, wr_dirty;

  tag_cache #(.SET_W(SET_W), .ENTRIES(ENTRIES), .TC_WAYS(TC_WAYS), .LAT(LAT)) dut (.*);

  // reference model
  bit               m_valid [TC_SETS][TC_WAYS];
  bit               m_dirty [TC_SETS][TC_WAYS];
  logic [SET_W-1:0] m_set   [TC_SETS][TC_WAYS];
  batch_t           m_batch [TC_SETS][TC_WAYS];
  logic [POS_W-1:0] m_hand  [TC_SETS][TC_WAYS];
  int               m_next  [TC_SETS];

  int unsigned checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic batch_t rand_batch();
    batch_t b;
    for (int i = 0; i < WAYS; i++) b[i] = tag_t'($urandom);
    return b;
  endfunction

  // expected answer of the model for a set
  task automatic expect_rsp(input logic [SET_W-1:0] s, input string what);
    int idx, hw, vw;
    idx = s % TC_SETS;
    hw = -1;
    for (int w = 0; w < TC_WAYS; w++) if (m_valid[idx][w] && m_set[idx][w] == s) hw = w;
    vw = m_next[idx];
    for (int w = TC_WAYS - 1; w >= 0; w--) if (!m_valid[idx][w]) vw = w;
    checks++;
    if (rsp_hit !== (hw >= 0)) begin
      failures++; $display("FAIL %s set %0d hit %0b", what, s, rsp_hit);
    end else if (hw >= 0) begin
      if (rsp_way != hw || rsp_batch !== m_batch[idx][hw] || rsp_hand !== m_hand[idx][hw]) begin
        failures++; $display("FAIL %s set %0d hit content", what, s);
      end
    end else begin
      if (rsp_vic_way != vw || rsp_vic_valid !== m_valid[idx][vw]
          || (m_valid[idx][vw] && (rsp_vic_set !== m_set[idx][vw] || rsp_vic_batch !== m_batch[idx][vw]
                                   || rsp_vic_dirty !== m_dirty[idx][vw]))) begin
        failures++; $display("FAIL %s set %0d victim way %0d exp %0d", what, s, rsp_vic_way, vw);
      end
    end
  endtask

  task automatic lookup(input logic [SET_W-1:0] s);
    longint unsigned t0;
    @(negedge clk);
    lu_valid = 1; lu_set = s;
    @(negedge clk);
    lu_valid = 0;
    t0 = cycle;
    while (!rsp_valid) @(negedge clk);
    checks++;
    if (cycle - t0 + 1 != LAT) begin
      failures++; $display("FAIL latency %0d, expected %0d", cycle - t0 + 1, LAT);
    end
    expect_rsp(s, "lookup");
  endtask

  task automatic write(input logic [SET_W-1:0] s, input int w, input bit fill, input bit d);
    batch_t b;
    logic [POS_W-1:0] hnd;
    int idx;
    b = rand_batch(); hnd = 4'($urandom); idx = s % TC_SETS;
    @(negedge clk);
    wr_valid = 1; wr_fill = fill; wr_set = s; wr_way = 2'(w); wr_batch = b; wr_hand = hnd; wr_dirty = d;
    @(negedge clk);
    wr_valid = 0;
    m_valid[idx][w] = 1; m_dirty[idx][w] = d; m_set[idx][w] = s; m_batch[idx][w] = b; m_hand[idx][w] = hnd;
    if (fill) m_next[idx] = (w + 1) % TC_WAYS;
  endtask

  initial begin
    lu_valid = 0; lu_set = 0; wr_valid = 0; wr_fill = 0; wr_set = 0; wr_way = 0;
    wr_batch = '0; wr_hand = 0; wr_dirty = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic [SET_W-1:0] s;
      s = SET_W'($urandom_range(0, 23));
      lookup(s);
      if (!rsp_hit) write(s, rsp_vic_way, 1'b1, 1'($urandom));
      else if ($urandom_range(0, 1) == 1) write(s, rsp_way, 1'b0, 1'b1);
    end
    // back-to-back lookups, one per cycle
    begin
      logic [SET_W-1:0] q [$];
      int got;
      @(negedge clk);
      for (int k = 0; k < 6; k++) begin
        lu_valid = 1; lu_set = SET_W'($urandom_range(0, 23)); q.push_back(lu_set);
        @(negedge clk);
      end
      lu_valid = 0;
      got = 0;
      repeat (LAT + 2) begin
        if (rsp_valid) begin expect_rsp(q.pop_front(), "burst"); got++; end
        @(negedge clk);
      end
      checks++;
      if (got != 6) begin failures++; $display("FAIL burst returned %0d of 6", got); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
