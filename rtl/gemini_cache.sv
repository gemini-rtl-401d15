// gemini_cache: controller of a partially direct-mapped DRAM cache ("Gemini").
//
// The DRAM cache is 16-way set associative, with tags kept in separate tag
// rows and cached, one 16-tag batch per set, in an SRAM tag cache. A request
// whose set has no batch in the tag cache is a leading block; all others are
// following blocks. Leading blocks are placed at a way given by a hash of
// their address (static mapping), so the controller reads that way at once,
// in parallel with the tag batch, which sits in another bank. Following
// blocks are placed by the RV-CLOCK replacement policy (dynamic mapping) and
// found through the cached tag batch. When a block changes type, the mapping
// policy and the type filter adjust its priority bit or migrate it to its
// static position. This division of work follows the original description;
// the sequencing below, the port protocol and the write handling are this
// design's own.
//
// Request port: req_valid/req_ready handshake with req_we, req_blk (block
// address in 64-byte units) and req_wdata (a whole 64-byte line for writes).
// One request is served at a time; rsp_valid pulses when it is done, with
// rsp_rdata for reads and rsp_event describing the access path (A, B1, B2,
// C, D) and the mechanisms it used.
// DRAM ports (DRAM-cache data banks "dcd", DRAM-cache tag banks "dct", main
// memory "mm"): a request is held with *_req_valid until *_req_ready; a read
// returns exactly one *_rsp_valid with the data, later; a write returns
// nothing. DRAM-cache addresses are dram_loc_t values from dram_layout, main
// memory addresses are block addresses.
//
// Sequence of one request (S_ = state):
//   IDLE    accept, start the tag cache lookup (TC_LAT cycles)
//   TCWAIT  tag cache hit  -> following, work on the cached batch
//           tag cache miss -> leading, LEADRD reads the tag batch and the
//                             line at the static position concurrently
//   DECIDE  search the batch, run the mapping policy or RV-CLOCK, plan:
//   RD      serial read of a line (hit off the static position, or a dirty
//           victim chosen by RV-CLOCK)
//   WB      write a dirty victim back to main memory
//   MMRD    read the block from main memory (read miss)
//   DCWR    write the new / migrated / written line into the DRAM cache
//   TAGWB   write the tag batch evicted from the tag cache back to its tag row
//   DONE    update the tag cache, respond
// Write requests carry a full line: a write miss allocates without reading
// main memory, and write hits just overwrite the line and set its dirty bit.
// Every tag cache entry written back is marked dirty, since each access at
// least sets a reference bit.
module gemini_cache
  import gemini_pkg::*;
#(
  parameter int unsigned BLK_W      = 28,     // 16GB main memory in 64B blocks
  parameter int unsigned SET_W      = 20,     // 1GB DRAM cache, 16-way, 64B lines
  parameter int unsigned OFF_W      = 4,      // 16-block sections
  parameter int unsigned TC_ENTRIES = 32768,  // tag cache entries
  parameter int unsigned TC_WAYS    = 8,
  parameter int unsigned TC_LAT     = 9,      // tag cache lookup cycles
  parameter int unsigned CHANNELS   = 4,
  parameter int unsigned BANKS      = 16,
  parameter int unsigned ROW_BYTES  = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  // requests from the last-level SRAM cache
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [BLK_W-1:0]  req_blk,
  input  logic [LINE_W-1:0] req_wdata,
  output logic              rsp_valid,
  output logic [LINE_W-1:0] rsp_rdata,
  output event_t            rsp_event,
  // DRAM cache, data banks
  output logic              dcd_req_valid,
  input  logic              dcd_req_ready,
  output mem_req_t          dcd_req,
  input  logic              dcd_rsp_valid,
  input  logic [LINE_W-1:0] dcd_rsp_rdata,
  // DRAM cache, tag banks
  output logic              dct_req_valid,
  input  logic              dct_req_ready,
  output mem_req_t          dct_req,
  input  logic              dct_rsp_valid,
  input  logic [LINE_W-1:0] dct_rsp_rdata,
  // main memory
  output logic              mm_req_valid,
  input  logic              mm_req_ready,
  output mem_req_t          mm_req,
  input  logic              mm_rsp_valid,
  input  logic [LINE_W-1:0] mm_rsp_rdata
);
  localparam int unsigned UP_W  = BLK_W - SET_W - OFF_W;
  localparam int unsigned KEY_W = UP_W + OFF_W;
  localparam int unsigned TCW_W = $clog2(TC_WAYS);

  typedef enum logic [3:0] {
    S_IDLE, S_TCWAIT, S_LEADRD, S_DECIDE, S_RD, S_RDWAIT, S_WB,
    S_MMRD, S_MMWAIT, S_DCWR, S_TAGWB, S_DONE
  } state_e;

  typedef enum logic [1:0] { SRC_WDATA, SRC_MM, SRC_RD, SRC_SPOS } src_e;

  state_e state_q;

  // request
  logic              we_q;
  logic [BLK_W-1:0]  blk_q;
  logic [LINE_W-1:0] wdata_q;
  logic [SET_W-1:0]  set_q;
  logic [ATAG_W-1:0] atag_q;
  logic [POS_W-1:0]  spos;

  assign set_q  = blk_q[OFF_W +: SET_W];
  assign atag_q = ATAG_W'({blk_q[BLK_W-1 -: UP_W], blk_q[OFF_W-1:0]});

  static_hash #(.BLK_W(BLK_W), .SET_W(SET_W), .OFF_W(OFF_W)) u_hash (
    .blk_addr(blk_q), .static_pos(spos)
  );

  // tag cache
  logic             tc_rsp_valid, tc_rsp_hit, tc_vic_valid, tc_vic_dirty;
  logic [TCW_W-1:0] tc_rsp_way, tc_vic_way;
  batch_t           tc_rsp_batch, tc_vic_batch;
  logic [POS_W-1:0] tc_rsp_hand;
  logic [SET_W-1:0] tc_vic_set;
  logic             tc_wr;

  logic             tc_hit_q;
  logic [TCW_W-1:0] tc_way_q, tcv_way_q;
  logic             tcv_valid_q, tcv_dirty_q;
  logic [SET_W-1:0] tcv_set_q;
  batch_t           tcv_batch_q;

  batch_t           batch_q, nb_q;
  logic [POS_W-1:0] hand_q, nhand_q;

  tag_cache #(
    .SET_W(SET_W), .ENTRIES(TC_ENTRIES), .TC_WAYS(TC_WAYS), .LAT(TC_LAT)
  ) u_tc (
    .clk, .rst_n,
    .lu_valid     (req_valid && req_ready),
    .lu_set       (req_blk[OFF_W +: SET_W]),
    .rsp_valid    (tc_rsp_valid),
    .rsp_hit      (tc_rsp_hit),
    .rsp_way      (tc_rsp_way),
    .rsp_batch    (tc_rsp_batch),
    .rsp_hand     (tc_rsp_hand),
    .rsp_vic_way  (tc_vic_way),
    .rsp_vic_valid(tc_vic_valid),
    .rsp_vic_dirty(tc_vic_dirty),
    .rsp_vic_set  (tc_vic_set),
    .rsp_vic_batch(tc_vic_batch),
    .wr_valid     (tc_wr),
    .wr_fill      (tc_wr && !tc_hit_q),
    .wr_set       (set_q),
    .wr_way       (tc_hit_q ? tc_way_q : tcv_way_q),
    .wr_batch     (nb_q),
    .wr_hand      (nhand_q),
    .wr_dirty     (1'b1)
  );

  // DRAM cache layout
  logic [POS_W-1:0] loc_way;
  dram_loc_t        data_loc, tag_loc, vic_data_loc, vic_tag_loc;

  dram_layout #(.SET_W(SET_W), .CHANNELS(CHANNELS), .BANKS(BANKS), .ROW_BYTES(ROW_BYTES))
    u_lay (.set_idx(set_q), .way(loc_way), .data_loc(data_loc), .tag_loc(tag_loc));
  dram_layout #(.SET_W(SET_W), .CHANNELS(CHANNELS), .BANKS(BANKS), .ROW_BYTES(ROW_BYTES))
    u_lay_vic (.set_idx(tcv_set_q), .way('0), .data_loc(vic_data_loc), .tag_loc(vic_tag_loc));

  // ---------------------------------------------------------------------
  // Decision on the tag batch
  // ---------------------------------------------------------------------
  logic             found;
  logic [POS_W-1:0] pos;
  logic             now_leading;
  tag_t             pol_ent;
  pol_action_e      pol_act;
  logic             pol_wb, pol_f2l, pol_l2f, pol_res;
  logic [WAYS-1:0]  b_valid, b_a, b_h;
  logic [POS_W-1:0] rv_victim, rv_hand;
  logic [WAYS-1:0]  rv_clear;
  logic             rv_full, rv_vlead;

  assign now_leading = !tc_hit_q;

  always_comb begin
    found = 1'b0;
    pos   = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      b_valid[w] = batch_q[w].valid;
      b_a[w]     = batch_q[w].a;
      b_h[w]     = batch_q[w].h;
      if (batch_q[w].valid && batch_q[w].atag == atag_q) begin
        found = 1'b1;
        pos   = POS_W'(w);
      end
    end
  end

  mapping_policy u_pol (
    .now_leading(now_leading),
    .pos        (pos),
    .static_pos (spos),
    .ent        (batch_q[pos]),
    .static_ent (batch_q[spos]),
    .new_ent    (pol_ent),
    .action     (pol_act),
    .wb_static  (pol_wb),
    .f2l        (pol_f2l),
    .l2f        (pol_l2f),
    .reserved   (pol_res)
  );

  rv_clock u_rv (
    .valid(b_valid), .a(b_a), .h(b_h), .hand(hand_q),
    .victim(rv_victim), .new_hand(rv_hand), .a_clear(rv_clear),
    .full_range(rv_full), .victim_leading(rv_vlead)
  );

  // plan, computed in S_DECIDE
  typedef struct packed {
    logic             do_rd;
    logic [POS_W-1:0] rd_pos;
    logic             do_wb;
    logic             wb_from_rd;
    logic [BLK_W-1:0] wb_blk;
    logic             do_mmrd;
    logic             do_dcwr;
    logic [POS_W-1:0] wr_pos;
    src_e             wr_src;
    logic             do_tagwb;
    src_e             rsp_src;
  } plan_t;

  plan_t            plan_d, plan_q;
  batch_t           nb_d;
  logic [POS_W-1:0] nhand_d;
  event_t           ev_d, ev_q;

  function automatic logic [BLK_W-1:0] blk_of(tag_t t, logic [SET_W-1:0] s);
    logic [KEY_W-1:0] key;
    key = t.atag[KEY_W-1:0];
    return {key[KEY_W-1 -: UP_W], s, key[OFF_W-1:0]};
  endfunction

  always_comb begin
    tag_t       ins;
    logic [POS_W-1:0] vic;

    plan_d  = '0;
    nb_d    = batch_q;
    nhand_d = hand_q;
    ev_d    = '0;
    ev_d.leading = now_leading;
    plan_d.do_tagwb = !tc_hit_q && tcv_valid_q && tcv_dirty_q;
    ev_d.tc_wb      = plan_d.do_tagwb;
    plan_d.rsp_src  = SRC_RD;
    plan_d.wr_src   = SRC_WDATA;

    ins       = '0;
    ins.atag  = atag_q;
    ins.a     = 1'b1;
    ins.h     = now_leading;
    ins.valid = 1'b1;
    ins.dirty = we_q;
    ins.ltype = now_leading;
    vic       = '0;

    if (found) begin
      // DRAM cache hit
      ev_d.path      = !now_leading ? PATH_A : (pos == spos ? PATH_B1 : PATH_B2);
      ev_d.f2l       = pol_f2l;
      ev_d.l2f       = pol_l2f;
      ev_d.reserved  = pol_res;
      ev_d.clear_ref = (pol_act == POL_CLEAR_REF);
      ev_d.migrate   = (pol_act == POL_MIGRATE);
      ev_d.wb_dirty  = pol_wb;

      nb_d[pos] = pol_ent;
      if (we_q) nb_d[pos].dirty = 1'b1;

      if (now_leading && pos == spos) begin
        // B1: the line was read together with the tag batch
        plan_d.rsp_src = SRC_SPOS;
        plan_d.do_dcwr = we_q;
        plan_d.wr_pos  = pos;
      end else if (pol_act == POL_MIGRATE) begin
        plan_d.do_rd      = !we_q;
        plan_d.rd_pos     = pos;
        plan_d.do_wb      = pol_wb;
        plan_d.wb_from_rd = 1'b0;
        plan_d.wb_blk     = blk_of(batch_q[spos], set_q);
        plan_d.do_dcwr    = 1'b1;
        plan_d.wr_pos     = spos;
        plan_d.wr_src     = we_q ? SRC_WDATA : SRC_RD;
        nb_d[spos]        = nb_d[pos];
        nb_d[pos]         = '0;
      end else begin
        // A, or B2 without migration
        plan_d.do_rd   = !we_q;
        plan_d.rd_pos  = pos;
        plan_d.do_dcwr = we_q;
        plan_d.wr_pos  = pos;
        if (pol_act == POL_CLEAR_REF) nb_d[spos].a = 1'b0;
      end
    end else begin
      // DRAM cache miss
      if (now_leading) begin
        // D: the static position is the victim
        ev_d.path         = PATH_D;
        vic               = spos;
        ev_d.static_evict = batch_q[spos].valid;
        plan_d.do_wb      = batch_q[spos].valid && batch_q[spos].dirty;
        plan_d.wb_from_rd = 1'b0;
      end else begin
        // C: RV-CLOCK picks the victim
        ev_d.path          = PATH_C;
        vic                = rv_victim;
        ev_d.full_range    = rv_full;
        ev_d.evict_leading = rv_vlead;
        plan_d.do_rd       = batch_q[rv_victim].valid && batch_q[rv_victim].dirty;
        plan_d.rd_pos      = rv_victim;
        plan_d.do_wb       = plan_d.do_rd;
        plan_d.wb_from_rd  = 1'b1;
        for (int w = 0; w < WAYS; w++) if (rv_clear[w]) nb_d[w].a = 1'b0;
        nhand_d = rv_hand;
      end
      ev_d.wb_dirty  = plan_d.do_wb;
      plan_d.wb_blk  = blk_of(batch_q[vic], set_q);
      plan_d.do_mmrd = !we_q;
      plan_d.do_dcwr = 1'b1;
      plan_d.wr_pos  = vic;
      plan_d.wr_src  = we_q ? SRC_WDATA : SRC_MM;
      plan_d.rsp_src = SRC_MM;
      nb_d[vic]      = ins;
    end
  end

  // next step of the plan after a given state
  function automatic state_e next_after(state_e s, plan_t p);
    state_e n;
    n = S_DONE;
    if (p.do_tagwb && s < S_TAGWB) n = S_TAGWB;
    if (p.do_dcwr  && s < S_DCWR)  n = S_DCWR;
    if (p.do_mmrd  && s < S_MMRD)  n = S_MMRD;
    if (p.do_wb    && s < S_WB)    n = S_WB;
    if (p.do_rd    && s < S_RD)    n = S_RD;
    return n;
  endfunction

  // ---------------------------------------------------------------------
  // Sequencer
  // ---------------------------------------------------------------------
  logic              lead_tag_sent, lead_dat_sent, lead_tag_got, lead_dat_got;
  logic [LINE_W-1:0] spos_data_q, rd_data_q, mm_data_q;

  assign req_ready = (state_q == S_IDLE);
  assign tc_wr     = (state_q == S_DONE);

  always_comb begin
    loc_way = spos;
    if (state_q == S_RD)   loc_way = plan_q.rd_pos;
    if (state_q == S_DCWR) loc_way = plan_q.wr_pos;
  end

  always_comb begin
    dcd_req_valid = 1'b0;
    dcd_req       = '0;
    dcd_req.addr  = LOC_W'(data_loc);
    dct_req_valid = 1'b0;
    dct_req       = '0;
    dct_req.addr  = LOC_W'(tag_loc);
    mm_req_valid  = 1'b0;
    mm_req        = '0;
    unique case (state_q)
      S_LEADRD: begin
        dct_req_valid = !lead_tag_sent;
        dcd_req_valid = !lead_dat_sent;
      end
      S_RD: dcd_req_valid = 1'b1;
      S_DCWR: begin
        dcd_req_valid = 1'b1;
        dcd_req.we    = 1'b1;
        unique case (plan_q.wr_src)
          SRC_MM:  dcd_req.wdata = mm_data_q;
          SRC_RD:  dcd_req.wdata = rd_data_q;
          default: dcd_req.wdata = wdata_q;
        endcase
      end
      S_TAGWB: begin
        dct_req_valid = 1'b1;
        dct_req.we    = 1'b1;
        dct_req.addr  = LOC_W'(vic_tag_loc);
        dct_req.wdata = tcv_batch_q;
      end
      S_WB: begin
        mm_req_valid = 1'b1;
        mm_req.we    = 1'b1;
        mm_req.addr  = LOC_W'(plan_q.wb_blk);
        mm_req.wdata = plan_q.wb_from_rd ? rd_data_q : spos_data_q;
      end
      S_MMRD: begin
        mm_req_valid = 1'b1;
        mm_req.addr  = LOC_W'(blk_q);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      lead_tag_sent <= 1'b0;
      lead_dat_sent <= 1'b0;
      lead_tag_got  <= 1'b0;
      lead_dat_got  <= 1'b0;
      tc_hit_q      <= 1'b0;
      tc_way_q      <= '0;
      tcv_way_q     <= '0;
      tcv_valid_q   <= 1'b0;
      tcv_dirty_q   <= 1'b0;
      tcv_set_q     <= '0;
      we_q          <= 1'b0;
      blk_q         <= '0;
      hand_q        <= '0;
      nhand_q       <= '0;
      plan_q        <= '0;
      ev_q          <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          we_q    <= req_we;
          blk_q   <= req_blk;
          state_q <= S_TCWAIT;
        end
        S_TCWAIT: if (tc_rsp_valid) begin
          tc_hit_q    <= tc_rsp_hit;
          tc_way_q    <= tc_rsp_way;
          tcv_way_q   <= tc_vic_way;
          tcv_valid_q <= tc_vic_valid;
          tcv_dirty_q <= tc_vic_dirty;
          tcv_set_q   <= tc_vic_set;
          hand_q      <= tc_rsp_hand;
          if (tc_rsp_hit) begin
            state_q <= S_DECIDE;
          end else begin
            hand_q        <= '0;
            lead_tag_sent <= 1'b0;
            lead_dat_sent <= 1'b0;
            lead_tag_got  <= 1'b0;
            lead_dat_got  <= 1'b0;
            state_q       <= S_LEADRD;
          end
        end
        S_LEADRD: begin
          if (dct_req_valid && dct_req_ready) lead_tag_sent <= 1'b1;
          if (dcd_req_valid && dcd_req_ready) lead_dat_sent <= 1'b1;
          if (dct_rsp_valid) lead_tag_got <= 1'b1;
          if (dcd_rsp_valid) lead_dat_got <= 1'b1;
          if ((lead_tag_got || dct_rsp_valid) && (lead_dat_got || dcd_rsp_valid))
            state_q <= S_DECIDE;
        end
        S_DECIDE: begin
          plan_q  <= plan_d;
          nhand_q <= nhand_d;
          ev_q    <= ev_d;
          state_q <= next_after(S_DECIDE, plan_d);
        end
        S_RD:     if (dcd_req_ready) state_q <= S_RDWAIT;
        S_RDWAIT: if (dcd_rsp_valid) state_q <= next_after(S_RDWAIT, plan_q);
        S_WB:     if (mm_req_ready)  state_q <= next_after(S_WB, plan_q);
        S_MMRD:   if (mm_req_ready)  state_q <= S_MMWAIT;
        S_MMWAIT: if (mm_rsp_valid)  state_q <= next_after(S_MMWAIT, plan_q);
        S_DCWR:   if (dcd_req_ready) state_q <= next_after(S_DCWR, plan_q);
        S_TAGWB:  if (dct_req_ready) state_q <= S_DONE;
        S_DONE:   state_q <= S_IDLE;
        default:  state_q <= S_IDLE;
      endcase
    end
  end

  // data path registers (no reset needed: written before they are read)
  always_ff @(posedge clk) begin
    if (state_q == S_IDLE && req_valid) wdata_q <= req_wdata;
    if (state_q == S_TCWAIT && tc_rsp_valid) begin
      batch_q     <= tc_rsp_batch;
      tcv_batch_q <= tc_vic_batch;
    end
    if (state_q == S_LEADRD && dct_rsp_valid) batch_q     <= dct_rsp_rdata;
    if (state_q == S_LEADRD && dcd_rsp_valid) spos_data_q <= dcd_rsp_rdata;
    if (state_q == S_RDWAIT && dcd_rsp_valid) rd_data_q   <= dcd_rsp_rdata;
    if (state_q == S_MMWAIT && mm_rsp_valid)  mm_data_q   <= mm_rsp_rdata;
    if (state_q == S_DECIDE) nb_q <= nb_d;
  end

  // response
  assign rsp_valid = (state_q == S_DONE);
  assign rsp_event = ev_q;
  always_comb begin
    unique case (plan_q.rsp_src)
      SRC_SPOS: rsp_rdata = spos_data_q;
      SRC_MM:   rsp_rdata = mm_data_q;
      default:  rsp_rdata = rd_data_q;
    endcase
    if (we_q) rsp_rdata = '0;
  end

  // Port rules: a request is held unchanged until it is accepted.
  a_dcd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    dcd_req_valid && !dcd_req_ready |=> dcd_req_valid && $stable(dcd_req));
  a_dct_hold: assert property (@(posedge clk) disable iff (!rst_n)
    dct_req_valid && !dct_req_ready |=> dct_req_valid && $stable(dct_req));
  a_mm_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mm_req_valid && !mm_req_ready |=> mm_req_valid && $stable(mm_req));
endmodule
