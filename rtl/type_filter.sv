// type_filter: the frequent type transition filter with priority reservation.
//
// Every tag carries a two-bit counter C. On each access of a block already in
// its set, the counter is updated from the block's previous type and its
// current type, as described for the filter:
//   following -> leading   : C = min(C + 2, 3)
//   following -> following : C = max(C - 1, 0)
//   leading   -> any       : C unchanged
// A block whose counter is not 00 is treated as unstable and keeps high
// priority. The priority bit given back is therefore 1 for a leading access
// and (C != 00) for a following access. The saturation at 3 and applying the
// priority rule on every following access (so a reserved block falls back to
// low priority once its counter has drained to 00) are this design's reading
// of the description.
// Interface: purely combinational.
module type_filter (
  input  logic       last_leading,  // type of the block's previous access
  input  logic       now_leading,   // type of the current access
  input  logic [1:0] c_in,
  output logic [1:0] c_out,
  output logic       prio,          // new priority bit H
  output logic       transition     // last type differs from current type
);
  always_comb begin
    c_out = c_in;
    if (!last_leading && now_leading) begin
      c_out = (c_in >= 2'd2) ? 2'd3 : c_in + 2'd2;
    end else if (!last_leading && !now_leading) begin
      c_out = (c_in == 2'd0) ? 2'd0 : c_in - 2'd1;
    end
    prio       = now_leading | (c_out != 2'd0);
    transition = last_leading ^ now_leading;
  end
endmodule
