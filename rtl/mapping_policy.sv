// mapping_policy: the block type transition handling of the mapping policy.
//
// Used when a requested block is found in its set (through the tag batch).
// The block is currently leading when its section was inactive (tag cache
// miss) and following otherwise; its previous type is kept in the tag. The
// module follows the mapping-policy algorithm step by step:
//   leading -> following : the priority bit is reset (unless the type filter
//                          reserves high priority, see type_filter)
//   following -> leading, block already at its static position :
//                          the priority bit is set
//   following -> leading, elsewhere, and the static position holds a leading
//                          line whose reference bit is set :
//                          only that line's reference bit is cleared
//   following -> leading, otherwise :
//                          the block migrates to its static position; the
//                          occupant there is written back if dirty and
//                          dropped, the old position is freed and the
//                          priority bit is set
// In every case the block's own reference bit is set, its last type is
// updated and its filter counter comes from type_filter. Treating an invalid
// static position as "not leading" (so the block migrates into it) is this
// design's reading.
// Interface: purely combinational; the controller applies new_ent and action.
module mapping_policy
  import gemini_pkg::*;
(
  input  logic             now_leading,
  input  logic [POS_W-1:0] pos,         // where the block is
  input  logic [POS_W-1:0] static_pos,  // where the hash puts it
  input  tag_t             ent,         // the block's tag
  input  tag_t             static_ent,  // tag at the static position
  output tag_t             new_ent,     // the block's updated tag
  output pol_action_e      action,
  output logic             wb_static,   // occupant of static_pos is dirty and must be written back
  output logic             f2l,
  output logic             l2f,
  output logic             reserved     // high priority kept on a transition to following
);
  logic [1:0] c_next;
  logic       prio, trans;

  type_filter u_filter (
    .last_leading(ent.ltype),
    .now_leading (now_leading),
    .c_in        (ent.c),
    .c_out       (c_next),
    .prio        (prio),
    .transition  (trans)
  );

  always_comb begin
    f2l      = trans & now_leading;
    l2f      = trans & ~now_leading;
    reserved = l2f & prio;

    new_ent       = ent;
    new_ent.a     = 1'b1;
    new_ent.c     = c_next;
    new_ent.h     = prio;
    new_ent.ltype = now_leading;

    action = POL_STAY;
    if (f2l && pos != static_pos) begin
      if (static_ent.valid && static_ent.h && static_ent.a)
        action = POL_CLEAR_REF;
      else
        action = POL_MIGRATE;
    end
    wb_static = (action == POL_MIGRATE) && static_ent.valid && static_ent.dirty;
  end
endmodule
