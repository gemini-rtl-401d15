// tag_cache: the on-chip SRAM tag cache.
//
// Holds the tag batches of recently used DRAM cache sets. A set's section is
// active while its tag batch is here; an access that misses is a leading
// block, one that hits is a following block. Size, associativity and lookup
// latency follow the evaluated configuration: 32K entries, 8 ways, 9 cycles.
// One entry holds the whole 16-tag batch of one DRAM cache set (this
// design's reading of "entry"), plus the set's RV-CLOCK hand and a dirty
// flag telling whether the batch differs from the copy in the tag row.
//
// Lookup: lu_valid with lu_set in cycle t gives rsp_valid in cycle t + LAT
// with hit/way/batch/hand for the set, and the way that a fill would replace
// (first invalid way, else a per-set round-robin pointer: the replacement
// policy is this design's choice) with that way's contents, so that the
// controller can write a dirty batch back to DRAM before overwriting it.
// Lookups are pipelined, one per cycle. The array is read in the cycle after
// the request; the remaining LAT-1 cycles are a delay line standing for the
// SRAM access time.
// Write: wr_valid writes batch, hand and dirty flag of (wr_set, wr_way) and
// marks it valid; wr_fill also moves the round-robin pointer past the way.
// The caller must not look up a set in the cycles it is being written
// (the controller serves one request at a time).
module tag_cache
  import gemini_pkg::*;
#(
  parameter int unsigned SET_W   = 20,     // DRAM cache set index width
  parameter int unsigned ENTRIES = 32768,  // tag batches held
  parameter int unsigned TC_WAYS = 8,
  parameter int unsigned LAT     = 9       // lookup latency in cycles
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  logic             lu_valid,
  input  logic [SET_W-1:0] lu_set,
  output logic             rsp_valid,
  output logic             rsp_hit,
  output logic [$clog2(TC_WAYS)-1:0] rsp_way,
  output batch_t           rsp_batch,
  output logic [POS_W-1:0] rsp_hand,
  output logic [$clog2(TC_WAYS)-1:0] rsp_vic_way,
  output logic             rsp_vic_valid,
  output logic             rsp_vic_dirty,
  output logic [SET_W-1:0] rsp_vic_set,
  output batch_t           rsp_vic_batch,
  // write / fill
  input  logic             wr_valid,
  input  logic             wr_fill,
  input  logic [SET_W-1:0] wr_set,
  input  logic [$clog2(TC_WAYS)-1:0] wr_way,
  input  batch_t           wr_batch,
  input  logic [POS_W-1:0] wr_hand,
  input  logic             wr_dirty
);
  localparam int unsigned TC_SETS = ENTRIES / TC_WAYS;
  localparam int unsigned IDX_W   = $clog2(TC_SETS);
  localparam int unsigned TT_W    = SET_W - IDX_W;
  localparam int unsigned WAY_W   = $clog2(TC_WAYS);

  typedef struct packed {
    logic             hit;
    logic [WAY_W-1:0] way;
    batch_t           batch;
    logic [POS_W-1:0] hand;
    logic [WAY_W-1:0] vic_way;
    logic             vic_valid;
    logic             vic_dirty;
    logic [SET_W-1:0] vic_set;
    batch_t           vic_batch;
  } rsp_t;

  // Storage
  batch_t           batch_mem [TC_SETS][TC_WAYS];
  logic [POS_W-1:0] hand_mem  [TC_SETS][TC_WAYS];
  logic [TT_W-1:0]  ttag_mem  [TC_SETS][TC_WAYS];
  logic [TC_WAYS-1:0] valid_q [TC_SETS];
  logic [TC_WAYS-1:0] dirty_q [TC_SETS];
  logic [WAY_W-1:0]   rr_q    [TC_SETS];

  logic [IDX_W-1:0] lu_idx, wr_idx;
  assign lu_idx = lu_set[IDX_W-1:0];
  assign wr_idx = wr_set[IDX_W-1:0];

  // Stage 1: array read
  logic             s1_valid;
  logic [SET_W-1:0] s1_set;
  batch_t           s1_batch [TC_WAYS];
  logic [POS_W-1:0] s1_hand  [TC_WAYS];
  logic [TT_W-1:0]  s1_ttag  [TC_WAYS];
  logic [TC_WAYS-1:0] s1_vld, s1_drt;
  logic [WAY_W-1:0] s1_rr;

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      batch_mem[wr_idx][wr_way] <= wr_batch;
      hand_mem[wr_idx][wr_way]  <= wr_hand;
      ttag_mem[wr_idx][wr_way]  <= wr_set[SET_W-1:IDX_W];
    end
    if (lu_valid) begin
      for (int unsigned w = 0; w < TC_WAYS; w++) begin
        s1_batch[w] <= batch_mem[lu_idx][w];
        s1_hand[w]  <= hand_mem[lu_idx][w];
        s1_ttag[w]  <= ttag_mem[lu_idx][w];
      end
      s1_set <= lu_set;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < TC_SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
        rr_q[s]    <= '0;
      end
      s1_valid <= 1'b0;
      s1_vld   <= '0;
      s1_drt   <= '0;
      s1_rr    <= '0;
    end else begin
      if (wr_valid) begin
        valid_q[wr_idx][wr_way] <= 1'b1;
        dirty_q[wr_idx][wr_way] <= wr_dirty;
        if (wr_fill) rr_q[wr_idx] <= wr_way + WAY_W'(1);
      end
      s1_valid <= lu_valid;
      if (lu_valid) begin
        s1_vld <= valid_q[lu_idx];
        s1_drt <= dirty_q[lu_idx];
        s1_rr  <= rr_q[lu_idx];
      end
    end
  end

  // Tag compare and victim choice on the stage-1 data
  rsp_t s1_rsp;
  always_comb begin
    s1_rsp     = '0;
    s1_rsp.way = '0;
    for (int w = TC_WAYS - 1; w >= 0; w--) begin
      if (s1_vld[w] && s1_ttag[w] == s1_set[SET_W-1:IDX_W]) begin
        s1_rsp.hit = 1'b1;
        s1_rsp.way = WAY_W'(w);
      end
    end
    s1_rsp.batch = s1_batch[s1_rsp.way];
    s1_rsp.hand  = s1_hand[s1_rsp.way];

    s1_rsp.vic_way = s1_rr;
    for (int w = TC_WAYS - 1; w >= 0; w--) begin
      if (!s1_vld[w]) s1_rsp.vic_way = WAY_W'(w);
    end
    s1_rsp.vic_valid = s1_vld[s1_rsp.vic_way];
    s1_rsp.vic_dirty = s1_drt[s1_rsp.vic_way];
    s1_rsp.vic_set   = {s1_ttag[s1_rsp.vic_way], s1_set[IDX_W-1:0]};
    s1_rsp.vic_batch = s1_batch[s1_rsp.vic_way];
  end

  // Remaining LAT-1 cycles of the lookup
  rsp_t out_rsp;
  logic out_valid;

  if (LAT > 1) begin : g_delay
    rsp_t             dl_rsp   [LAT-1];
    logic [LAT-2:0]   dl_valid;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        dl_valid <= '0;
      end else begin
        dl_valid[0] <= s1_valid;
        for (int unsigned i = 1; i < LAT - 1; i++) dl_valid[i] <= dl_valid[i-1];
      end
    end
    always_ff @(posedge clk) begin
      dl_rsp[0] <= s1_rsp;
      for (int unsigned i = 1; i < LAT - 1; i++) dl_rsp[i] <= dl_rsp[i-1];
    end
    assign out_rsp   = dl_rsp[LAT-2];
    assign out_valid = dl_valid[LAT-2];
  end else begin : g_nodelay
    assign out_rsp   = s1_rsp;
    assign out_valid = s1_valid;
  end

  assign rsp_valid     = out_valid;
  assign rsp_hit       = out_rsp.hit;
  assign rsp_way       = out_rsp.way;
  assign rsp_batch     = out_rsp.batch;
  assign rsp_hand      = out_rsp.hand;
  assign rsp_vic_way   = out_rsp.vic_way;
  assign rsp_vic_valid = out_rsp.vic_valid;
  assign rsp_vic_dirty = out_rsp.vic_dirty;
  assign rsp_vic_set   = out_rsp.vic_set;
  assign rsp_vic_batch = out_rsp.vic_batch;
endmodule
