// tb_type_filter: checks the two-bit frequent type transition filter on every
// input combination against the rule table, then runs type sequences and
// checks which leading->following transitions keep high priority.
module tb_type_filter;
  logic       last_l, now_l, prio, trans;
  logic [1:0] c_in, c_out;
  int unsigned checks = 0, failures = 0;

  type_filter dut (.last_leading(last_l), .now_leading(now_l), .c_in(c_in),
                   .c_out(c_out), .prio(prio), .transition(trans));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [1:0] ec, input logic ep, input logic et);
    #1;
    checks++;
    if (c_out !== ec || prio !== ep || trans !== et) begin
      failures++;
      $display("FAIL last=%0b now=%0b c=%0d -> c=%0d prio=%0b tr=%0b, expected %0d %0b %0b",
               last_l, now_l, c_in, c_out, prio, trans, ec, ep, et);
    end
  endtask

  // expected values written out by hand
  logic [1:0] exp_f2l [4] = '{2'd2, 2'd3, 2'd3, 2'd3};
  logic [1:0] exp_f2f [4] = '{2'd0, 2'd0, 2'd1, 2'd2};

  initial begin
    logic [1:0] c;
    for (int i = 0; i < 4; i++) begin
      c_in = 2'(i);
      last_l = 0; now_l = 1; chk(exp_f2l[i], 1'b1, 1'b1);
      last_l = 0; now_l = 0; chk(exp_f2f[i], exp_f2f[i] != 0, 1'b0);
      last_l = 1; now_l = 1; chk(2'(i), 1'b1, 1'b0);
      last_l = 1; now_l = 0; chk(2'(i), i != 0, 1'b1);
    end
    // F L F L F : each L->F keeps high priority (unstable block)
    c = 0; last_l = 0;
    for (int k = 0; k < 4; k++) begin
      now_l = (k % 2 == 0); c_in = c; #1;
      if (!now_l) begin
        checks++;
        if (!prio) begin failures++; $display("FAIL alternating block lost priority"); end
      end
      c = c_out; last_l = now_l;
    end
    // F F F F L F : after one F->L the block keeps priority for two F accesses only
    c = 0; last_l = 0;
    now_l = 1; c_in = c; #1; c = c_out; last_l = 1;           // F->L, c=2
    now_l = 0; c_in = c; #1; checks++; if (!prio) failures++; c = c_out; last_l = 0; // L->F keep
    now_l = 0; c_in = c; #1; checks++; if (!prio) failures++; c = c_out;             // c=1
    now_l = 0; c_in = c; #1; checks++; if (prio)  failures++; c = c_out;             // c=0 low
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
