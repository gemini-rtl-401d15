// tb_gemini_full: the controller at its full default size (1M sets of a 1GB
// DRAM cache, 16GB main memory, 32K-entry 8-way tag cache with 9-cycle
// lookup), with no parameter changed. It runs the same directed sequence as
// tb_gemini_cache, with eight conflicting sets to push a batch out of the
// 8-way tag cache, then random traffic over twelve sets that share one tag-cache index, and
// a read-back of everything written.
//
// Part 1 is a directed sequence whose access paths are worked out by hand:
// a cold leading miss (D), a tag-cache hit (A), a following miss (C), a
// leading hit at the static position (B1) after the tag batch was evicted,
// and a following->leading change that migrates the block (B2). The hit
// latencies of A and B1 are checked against TC_LAT + 3 + DRAM latency: a
// leading hit costs no more than a following hit, because the line and its
// tag batch are read concurrently.
// Part 2 is random traffic with spatial locality over five sets. Every read
// is compared with a reference image of memory kept by the testbench, and
// each access path and mechanism must occur at least once.
module tb_gemini_full;
  import gemini_pkg::*;

  localparam int unsigned SET_W  = 20;
  localparam int unsigned OFF_W  = 4;
  localparam int unsigned UP_W   = 4;
  localparam int unsigned BLK_W  = UP_W + SET_W + OFF_W;
  localparam int unsigned TC_LAT = 9;
  localparam int unsigned DC_LAT = 12;
  localparam int unsigned MM_LAT = 30;
  localparam int unsigned N_RANDOM = 6000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              req_valid, req_ready, req_we;
  logic [BLK_W-1:0]  req_blk;
  logic [LINE_W-1:0] req_wdata;
  logic              rsp_valid;
  logic [LINE_W-1:0] rsp_rdata;
  event_t            rsp_event;
  logic              dcd_req_valid, dcd_req_ready, dcd_rsp_valid;
  logic              dct_req_valid, dct_req_ready, dct_rsp_valid;
  logic              mm_req_valid, mm_req_ready, mm_rsp_valid;
  mem_req_t          dcd_req, dct_req, mm_req;
  logic [LINE_W-1:0] dcd_rsp_rdata, dct_rsp_rdata, mm_rsp_rdata;
  int unsigned       dcd_r, dcd_w, dct_r, dct_w, mm_r, mm_w;

  gemini_cache dut (.*);

  dram_model #(.LAT(DC_LAT), .INIT_PATTERN(1'b0)) u_dcd (
    .clk, .rst_n, .req_valid(dcd_req_valid), .req_ready(dcd_req_ready), .req(dcd_req),
    .rsp_valid(dcd_rsp_valid), .rsp_rdata(dcd_rsp_rdata), .n_reads(dcd_r), .n_writes(dcd_w));
  dram_model #(.LAT(DC_LAT), .INIT_PATTERN(1'b0)) u_dct (
    .clk, .rst_n, .req_valid(dct_req_valid), .req_ready(dct_req_ready), .req(dct_req),
    .rsp_valid(dct_rsp_valid), .rsp_rdata(dct_rsp_rdata), .n_reads(dct_r), .n_writes(dct_w));
  dram_model #(.LAT(MM_LAT), .INIT_PATTERN(1'b1), .STALL_EVERY(7)) u_mm (
    .clk, .rst_n, .req_valid(mm_req_valid), .req_ready(mm_req_ready), .req(mm_req),
    .rsp_valid(mm_rsp_valid), .rsp_rdata(mm_rsp_rdata), .n_reads(mm_r), .n_writes(mm_w));

  int unsigned checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // reference image of memory
  logic [LINE_W-1:0] ref_mem [logic [BLK_W-1:0]];

  function automatic logic [LINE_W-1:0] mm_init(logic [LOC_W-1:0] a);
    logic [LINE_W-1:0] v;
    for (int i = 0; i < LINE_W / 32; i++) v[i*32 +: 32] = a * 32'h9E3779B1 + 32'(i);
    return v;
  endfunction

  function automatic logic [LINE_W-1:0] expected(logic [BLK_W-1:0] b);
    return ref_mem.exists(b) ? ref_mem[b] : mm_init(LOC_W'(b));
  endfunction

  function automatic logic [BLK_W-1:0] mk(int unsigned up, int unsigned set, int unsigned off);
    return {UP_W'(up), SET_W'(set), OFF_W'(off)};
  endfunction

  function automatic logic [LINE_W-1:0] rand_line();
    logic [LINE_W-1:0] v;
    for (int i = 0; i < LINE_W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // mechanism counters
  int unsigned n_path [5];
  int unsigned n_migrate, n_clear_ref, n_wb, n_full, n_evict_lead, n_static_evict;
  int unsigned n_tc_wb, n_reserved, n_f2l, n_l2f, n_lead, n_follow;

  event_t          last_ev;
  longint unsigned last_lat;

  task automatic access(input logic we, input logic [BLK_W-1:0] b);
    logic [LINE_W-1:0] wd;
    logic [LINE_W-1:0] exp_d;
    longint unsigned   t0;
    wd = rand_line();
    exp_d = expected(b);
    // drive in a cycle where the controller is idle; it accepts at the
    // next rising edge
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1'b1;
    req_we    = we;
    req_blk   = b;
    req_wdata = wd;
    @(negedge clk);
    t0 = cycle;
    req_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    // rising edges from acceptance to the edge that ends the response cycle
    last_lat = cycle - t0 + 1;
    last_ev  = rsp_event;
    if (we) begin
      ref_mem[b] = wd;
    end else begin
      checks++;
      if (rsp_rdata !== exp_d) begin
        failures++;
        $display("FAIL read data blk=%h path=%0d", b, rsp_event.path);
      end
    end
    // consistency of the classification
    checks++;
    if (rsp_event.leading != (rsp_event.path inside {PATH_B1, PATH_B2, PATH_D})) begin
      failures++;
      $display("FAIL path %0d does not match leading=%0b", rsp_event.path, rsp_event.leading);
    end
    n_path[rsp_event.path]++;
    if (rsp_event.leading) n_lead++; else n_follow++;
    n_migrate      += rsp_event.migrate;
    n_clear_ref    += rsp_event.clear_ref;
    n_wb           += rsp_event.wb_dirty;
    n_full         += rsp_event.full_range;
    n_evict_lead   += rsp_event.evict_leading;
    n_static_evict += rsp_event.static_evict;
    n_tc_wb        += rsp_event.tc_wb;
    n_reserved     += rsp_event.reserved;
    n_f2l          += rsp_event.f2l;
    n_l2f          += rsp_event.l2f;
  endtask

  task automatic expect_path(input path_e p, input string what);
    checks++;
    if (last_ev.path != p) begin
      failures++;
      $display("FAIL %s: path %0d, expected %0d", what, last_ev.path, p);
    end
  endtask

  task automatic expect_lat(input longint unsigned l, input string what);
    checks++;
    if (last_lat != l) begin
      failures++;
      $display("FAIL %s: latency %0d, expected %0d", what, last_lat, l);
    end
  endtask

  task automatic need(input int unsigned n, input string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sets 5 + j*4096 share tag-cache index 5; eight of them push set 5 out
  task automatic evict_set5(input int unsigned off);
    for (int j = 1; j <= 8; j++) access(1'b0, mk(0, 5 + j * 4096, off));
  endtask

  localparam longint unsigned HIT_LAT = longint'(TC_LAT) + 64'd3 + longint'(DC_LAT);

  initial begin : main
    static logic [BLK_W-1:0] x, y;
    req_valid = 1'b0; req_we = 1'b0; req_blk = '0; req_wdata = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---------------- Part 1: directed ----------------
    // X: upper 1, offset 0 -> static way 1. Y: upper 1, offset 3 -> static way 2.
    x = mk(1, 5, 0);
    y = mk(1, 5, 3);
    access(1'b0, x); expect_path(PATH_D, "cold leading miss");
    access(1'b0, x); expect_path(PATH_A, "following hit");
    expect_lat(HIT_LAT, "following hit latency");
    access(1'b0, y); expect_path(PATH_C, "following miss");
    evict_set5(0); expect_path(PATH_D, "conflicting set");
    access(1'b0, x); expect_path(PATH_B1, "leading hit at static way");
    checks++;
    if (last_ev.tc_wb !== 1'b1) begin
      failures++; $display("FAIL tag batch of evicted set not written back");
    end
    // tag-batch write back delays the response by one cycle in TAGWB
    expect_lat(HIT_LAT + 1, "leading hit latency (with tag write-back)");
    access(1'b0, y); expect_path(PATH_A, "Y following hit");
    evict_set5(1);
    access(1'b0, y); expect_path(PATH_B2, "Y leading, off its static way");
    checks++;
    if (!(last_ev.f2l && last_ev.migrate)) begin
      failures++; $display("FAIL Y should migrate on following->leading");
    end
    access(1'b0, y); expect_path(PATH_A, "Y following after migration");
    evict_set5(2);
    access(1'b0, y); expect_path(PATH_B1, "Y now at its static way");
    expect_lat(HIT_LAT + 1, "leading hit after migration");

    // ---------------- Part 2: random traffic ----------------
    for (int n = 0; n < N_RANDOM; ) begin
      int unsigned up, st, burst;
      up    = $urandom_range(0, 3);
      st    = 5 + 4096 * $urandom_range(0, 11);  // 12 sets on one 8-way tag-cache index
      burst = $urandom_range(1, 5);
      for (int k = 0; k < burst; k++, n++) begin
        int unsigned off;
        off = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 15) : $urandom_range(0, 5);
        access($urandom_range(0, 9) < 3, mk(up, st, off));
      end
    end

    // read back everything written
    foreach (ref_mem[b]) access(1'b0, b);

    $display("paths A=%0d B1=%0d B2=%0d C=%0d D=%0d leading=%0d following=%0d",
             n_path[0], n_path[1], n_path[2], n_path[3], n_path[4], n_lead, n_follow);
    $display("migrate=%0d clear_ref=%0d dirty_wb=%0d full_range=%0d evict_leading=%0d",
             n_migrate, n_clear_ref, n_wb, n_full, n_evict_lead);
    $display("static_evict=%0d tc_wb=%0d reserved=%0d f2l=%0d l2f=%0d",
             n_static_evict, n_tc_wb, n_reserved, n_f2l, n_l2f);
    $display("dram: cache data r/w %0d/%0d, tags r/w %0d/%0d, main memory r/w %0d/%0d",
             dcd_r, dcd_w, dct_r, dct_w, mm_r, mm_w);
    need(n_path[PATH_A],  "path A");
    need(n_path[PATH_B1], "path B1");
    need(n_path[PATH_B2], "path B2");
    need(n_path[PATH_C],  "path C");
    need(n_path[PATH_D],  "path D");
    need(n_migrate,       "migration to static position");
    need(n_clear_ref,     "reference-bit clear instead of migration");
    need(n_wb,            "dirty victim write-back");
    need(n_full,          "RV-CLOCK over the whole set");
    need(n_evict_lead,    "leading block evicted by following insertion");
    need(n_static_evict,  "static position conflict eviction");
    need(n_tc_wb,         "tag batch write-back");
    need(n_reserved,      "priority reservation by the filter");
    need(n_f2l,           "following->leading transition");
    need(n_l2f,           "leading->following transition");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
