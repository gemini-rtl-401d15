// tb_mapping_policy: checks the type-transition handling case by case
// against the mapping-policy algorithm, for every combination of previous and
// current type, position equal or not to the static position, and static
// occupant state (invalid, following, leading unreferenced, leading
// referenced, dirty or clean), with random filter counters.
module tb_mapping_policy;
  import gemini_pkg::*;
  logic             now_leading, wb_static, f2l, l2f, reserved;
  logic [POS_W-1:0] pos, static_pos;
  tag_t             ent, static_ent, new_ent;
  pol_action_e      action;
  int unsigned checks = 0, failures = 0;

  mapping_policy dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      pol_action_e exp_act;
      logic [1:0]  exp_c;
      logic        exp_h;
      ent        = tag_t'($urandom);
      ent.valid  = 1'b1;
      static_ent = tag_t'($urandom);
      now_leading = 1'($urandom);
      pos         = 4'($urandom);
      static_pos  = ($urandom_range(0, 2) == 0) ? pos : 4'($urandom);
      // expected, from the algorithm and the filter rules
      exp_act = POL_STAY;
      if (!ent.ltype && now_leading && pos != static_pos)
        exp_act = (static_ent.valid && static_ent.h && static_ent.a) ? POL_CLEAR_REF : POL_MIGRATE;
      if (!ent.ltype && now_leading)       exp_c = (ent.c == 0) ? 2 : 3;
      else if (!ent.ltype && !now_leading) exp_c = (ent.c == 0) ? 0 : ent.c - 1;
      else                                 exp_c = ent.c;
      exp_h = now_leading ? 1'b1 : (exp_c != 0);
      #1;
      checks++;
      if (action !== exp_act || new_ent.c !== exp_c || new_ent.h !== exp_h || new_ent.a !== 1'b1
          || new_ent.ltype !== now_leading || new_ent.atag !== ent.atag || new_ent.dirty !== ent.dirty
          || wb_static !== (exp_act == POL_MIGRATE && static_ent.valid && static_ent.dirty)
          || f2l !== (!ent.ltype && now_leading) || l2f !== (ent.ltype && !now_leading)
          || reserved !== (ent.ltype && !now_leading && exp_c != 0)) begin
        failures++;
        $display("FAIL lt=%0b now=%0b pos=%0d sp=%0d st.v=%0b h=%0b a=%0b: act %0d exp %0d c %0d exp %0d h %0b exp %0b",
                 ent.ltype, now_leading, pos, static_pos, static_ent.valid, static_ent.h, static_ent.a,
                 action, exp_act, new_ent.c, exp_c, new_ent.h, exp_h);
      end
    end
    // leading -> following with counter 00: priority bit reset (algorithm line 4-5)
    ent = '0; ent.valid = 1; ent.ltype = 1; ent.h = 1; ent.c = 0; now_leading = 0;
    pos = 3; static_pos = 7; static_ent = '0; #1;
    checks++;
    if (new_ent.h !== 1'b0 || action !== POL_STAY) begin failures++; $display("FAIL L->F reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
