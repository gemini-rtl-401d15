// rv_clock: Range-Variable CLOCK victim selection for following-block
// insertion.
//
// CLOCK keeps a hand per set and a reference bit A per line. Starting at the
// hand, lines with A = 1 get a second chance (A is cleared) and the first line
// with A = 0 becomes the victim. RV-CLOCK changes the range the hand sweeps:
// the AND of the reference bits of all following lines (H = 0) forms a mask.
// While some following line is still unreferenced the leading lines (H = 1)
// are masked off and cannot be evicted; once every following line is
// referenced, CLOCK runs over the whole set and a cold leading line may go.
// That much follows the description of RV-CLOCK and its AND-gate figure.
//
// Choices of this design: an invalid line, if the set has one, is taken
// first (searching from the hand, no reference bits change). The full sweep
// of one CLOCK pass is evaluated in a single cycle: the lines skipped before
// the victim are returned in a_clear, and if every line in range is
// referenced, all of them are cleared and the first line in range from the
// hand is the victim (what a hand going round once would do). The hand moves
// to the line after the victim.
// Interface: purely combinational; the caller writes back a_clear and
// new_hand with the installed line.
module rv_clock
  import gemini_pkg::*;
(
  input  logic [WAYS-1:0]  valid,
  input  logic [WAYS-1:0]  a,        // reference bits
  input  logic [WAYS-1:0]  h,        // priority bits (1 = leading)
  input  logic [POS_W-1:0] hand,
  output logic [POS_W-1:0] victim,
  output logic [POS_W-1:0] new_hand,
  output logic [WAYS-1:0]  a_clear,  // reference bits the sweep cleared
  output logic             full_range,  // leading lines were in range
  output logic             victim_leading
);
  logic [WAYS-1:0] in_range;
  logic [WAYS-1:0] rot_free, rot_cand, rot_range;
  logic            any_free, any_cand;
  logic [POS_W-1:0] off;

  always_comb begin
    // Mask of the CLOCK range: AND of the following lines' reference bits.
    full_range = &(~valid | h | a);
    in_range   = valid & (~h | {WAYS{full_range}});

    for (int unsigned i = 0; i < WAYS; i++) begin
      rot_free[i]  = ~valid[(i + 32'(hand)) % WAYS];
      rot_cand[i]  = in_range[(i + 32'(hand)) % WAYS] & ~a[(i + 32'(hand)) % WAYS];
      rot_range[i] = in_range[(i + 32'(hand)) % WAYS];
    end
    any_free = |rot_free;
    any_cand = |rot_cand;

    off = '0;
    for (int i = WAYS - 1; i >= 0; i--) begin
      if (any_free) begin
        if (rot_free[i]) off = POS_W'(i);
      end else if (any_cand) begin
        if (rot_cand[i]) off = POS_W'(i);
      end else begin
        if (rot_range[i]) off = POS_W'(i);
      end
    end
    victim   = hand + off;
    new_hand = victim + POS_W'(1);

    a_clear = '0;
    if (!any_free) begin
      for (int unsigned i = 0; i < WAYS; i++) begin
        if (rot_range[i] && (!any_cand || i < off))
          a_clear[(i + 32'(hand)) % WAYS] = a[(i + 32'(hand)) % WAYS];
      end
    end
    victim_leading = valid[victim] & h[victim];
  end
endmodule
