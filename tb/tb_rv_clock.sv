// tb_rv_clock: checks RV-CLOCK victim selection against a step-by-step CLOCK
// hand model (the hand walks the set, clearing reference bits of lines in
// range until it finds one at 0), on random sets and on hand-made cases:
// leading lines are never chosen while some following line is unreferenced,
// and a cold leading line is chosen once all following lines are referenced.
module tb_rv_clock;
  import gemini_pkg::*;
  logic [WAYS-1:0]  valid, a, h, a_clear;
  logic [POS_W-1:0] hand, victim, new_hand;
  logic             full_range, victim_leading;
  int unsigned checks = 0, failures = 0;

  rv_clock dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    logic [WAYS-1:0] acopy;
    int   ev; int idx;
    logic full;
    acopy = a;
    ev = -1;
    for (int i = 0; i < WAYS && ev < 0; i++) begin
      idx = (hand + i) % WAYS;
      if (!valid[idx]) ev = idx;
    end
    full = 1'b1;
    for (int i = 0; i < WAYS; i++) if (valid[i] && !h[i] && !a[i]) full = 1'b0;
    if (ev < 0) begin
      for (int i = 0; i < 2 * WAYS && ev < 0; i++) begin
        idx = (hand + i) % WAYS;
        if (!h[idx] || full) begin
          if (!acopy[idx]) ev = idx;
          else acopy[idx] = 1'b0;
        end
      end
    end
    #1;
    checks++;
    if (victim !== POS_W'(ev) || a_clear !== (a & ~acopy) || new_hand !== POS_W'(ev + 1)
        || full_range !== full || victim_leading !== (valid[ev] & h[ev])) begin
      failures++;
      $display("FAIL v=%h a=%h h=%h hand=%0d: victim %0d exp %0d clear %h exp %h full %0b",
               valid, a, h, hand, victim, ev, a_clear, a & ~acopy, full_range);
    end
  endtask

  initial begin
    // masking case: a following line is unreferenced -> leading lines masked
    valid = '1; h = 16'h000B; a = '1; a[6] = 1'b0; a[0] = 1'b0; hand = 0;
    check_one();
    checks++;
    if (victim != 6 || victim_leading) begin failures++; $display("FAIL leading not masked"); end
    // all following referenced, leading line 1 cold -> it is evicted
    valid = '1; h = 16'h0003; a = '1; a[1] = 1'b0; hand = 0;
    check_one();
    checks++;
    if (victim != 1 || !victim_leading || !full_range) begin
      failures++; $display("FAIL cold leading not evicted");
    end
    // random sets
    for (int n = 0; n < 20000; n++) begin
      valid = ($urandom_range(0, 3) == 0) ? 16'($urandom) | 16'($urandom) : '1;
      h     = 16'($urandom) & 16'($urandom);
      a     = 16'($urandom) | (($urandom_range(0, 1) == 1) ? 16'($urandom) : 16'h0);
      if ($urandom_range(0, 3) == 0) a = '1;
      hand  = 4'($urandom);
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
