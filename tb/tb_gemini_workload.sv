// tb_gemini_workload: synthetic traffic shaped like the access pattern the
// hybrid mapping is built for. Each section is visited repeatedly; a visit
// starts with the same block every time (a stable leading block) and then
// touches a few other blocks of the section (following blocks). Between two
// visits of a section, other sets push its tag batch out of the small tag
// cache, so the next visit starts with a tag cache miss.
//
// Phase 1 (stable types, the leading blocks of a set have distinct static
// positions, a set's working set fits in its 16 lines): after a warm-up pass,
// almost every leading hit must be served at the static position together
// with the tag batch (path B1), not by a serial tag-then-data access (B2):
// at least 90% of leading hits.
// Phase 2 (unstable types): the first block of a visit alternates between
// two blocks, so blocks flip between leading and following; the filter must
// reserve priority on such flips. All reads are checked against a reference
// image of memory.
module tb_gemini_workload;
  import gemini_pkg::*;

  localparam int unsigned SET_W = 8, OFF_W = 4, UP_W = 4;
  localparam int unsigned BLK_W = UP_W + SET_W + OFF_W;
  localparam int unsigned N_SETS = 24, N_UP = 3, N_VISITS = 1500;

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

  gemini_cache #(
    .BLK_W(BLK_W), .SET_W(SET_W), .OFF_W(OFF_W),
    .TC_ENTRIES(16), .TC_WAYS(2), .TC_LAT(9)
  ) dut (.*);

  dram_model #(.LAT(12), .INIT_PATTERN(1'b0)) u_dcd (
    .clk, .rst_n, .req_valid(dcd_req_valid), .req_ready(dcd_req_ready), .req(dcd_req),
    .rsp_valid(dcd_rsp_valid), .rsp_rdata(dcd_rsp_rdata), .n_reads(dcd_r), .n_writes(dcd_w));
  dram_model #(.LAT(12), .INIT_PATTERN(1'b0)) u_dct (
    .clk, .rst_n, .req_valid(dct_req_valid), .req_ready(dct_req_ready), .req(dct_req),
    .rsp_valid(dct_rsp_valid), .rsp_rdata(dct_rsp_rdata), .n_reads(dct_r), .n_writes(dct_w));
  dram_model #(.LAT(30), .INIT_PATTERN(1'b1)) u_mm (
    .clk, .rst_n, .req_valid(mm_req_valid), .req_ready(mm_req_ready), .req(mm_req),
    .rsp_valid(mm_rsp_valid), .rsp_rdata(mm_rsp_rdata), .n_reads(mm_r), .n_writes(mm_w));

  int unsigned checks = 0, failures = 0;
  logic [LINE_W-1:0] ref_mem [logic [BLK_W-1:0]];
  int unsigned n_path [5];
  int unsigned n_reserved, n_f2l, n_l2f;

  function automatic logic [LINE_W-1:0] mm_init(logic [LOC_W-1:0] a);
    logic [LINE_W-1:0] v;
    for (int i = 0; i < LINE_W / 32; i++) v[i*32 +: 32] = a * 32'h9E3779B1 + 32'(i);
    return v;
  endfunction

  task automatic access(input logic we, input logic [BLK_W-1:0] b);
    logic [LINE_W-1:0] wd, exp_d;
    for (int i = 0; i < LINE_W / 32; i++) wd[i*32 +: 32] = $urandom;
    exp_d = ref_mem.exists(b) ? ref_mem[b] : mm_init(LOC_W'(b));
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1'b1; req_we = we; req_blk = b; req_wdata = wd;
    @(negedge clk);
    req_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    if (we) ref_mem[b] = wd;
    else begin
      checks++;
      if (rsp_rdata !== exp_d) begin
        failures++; $display("FAIL read data blk=%h", b);
      end
    end
    n_path[rsp_event.path]++;
    n_reserved += rsp_event.reserved;
    n_f2l      += rsp_event.f2l;
    n_l2f      += rsp_event.l2f;
  endtask

  // one visit of section (u, s): leading block first, then following blocks
  task automatic visit(input int unsigned u, input int unsigned s, input int unsigned first);
    access(1'b0, {UP_W'(u), SET_W'(s), OFF_W'(first)});
    for (int k = 1; k <= 3; k++)
      access($urandom_range(0, 9) == 0, {UP_W'(u), SET_W'(s), OFF_W'((first + 4 * k) % 16)});
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    static int unsigned lead_off [N_UP][N_SETS];
    static int unsigned b1_0, b2_0, b1, b2, res0;
    req_valid = 1'b0; req_we = 1'b0; req_blk = '0; req_wdata = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    // leading offsets are chosen so that the leading blocks of one set have
    // different static positions (the static position is upper ^ offset at
    // this size); sharing a static position is a conflict the mapping cannot
    // avoid and is left out of the stable phase
    for (int s = 0; s < N_SETS; s++)
      for (int u = 0; u < N_UP; u++) begin
        bit clash;
        do begin
          lead_off[u][s] = $urandom_range(0, 3);
          clash = 1'b0;
          for (int v = 0; v < u; v++)
            if ((u ^ lead_off[u][s]) == (v ^ lead_off[v][s])) clash = 1'b1;
        end while (clash);
      end

    // Phase 1: stable leading blocks. Warm-up pass over every section.
    for (int u = 0; u < N_UP; u++)
      for (int s = 0; s < N_SETS; s++) visit(u, s, lead_off[u][s]);
    b1_0 = n_path[PATH_B1]; b2_0 = n_path[PATH_B2];
    for (int n = 0; n < N_VISITS; n++) begin
      int unsigned u, s;
      u = $urandom_range(0, N_UP - 1); s = $urandom_range(0, N_SETS - 1);
      visit(u, s, lead_off[u][s]);
    end
    b1 = n_path[PATH_B1] - b1_0; b2 = n_path[PATH_B2] - b2_0;
    $display("stable types: leading hits B1=%0d B2=%0d, D=%0d", b1, b2, n_path[PATH_D]);
    checks++;
    if (b1 + b2 == 0 || b1 * 10 < (b1 + b2) * 9) begin
      failures++;
      $display("FAIL fewer than 90%% of leading hits served concurrently with the tag batch");
    end

    // Phase 2: unstable types, the first block alternates between two offsets
    res0 = n_reserved;
    for (int n = 0; n < N_VISITS; n++) begin
      int unsigned u, s;
      u = $urandom_range(0, N_UP - 1); s = $urandom_range(0, N_SETS - 1);
      visit(u, s, ($urandom_range(0, 1) == 1) ? lead_off[u][s] + 4 : lead_off[u][s]);
    end
    $display("unstable types: f2l=%0d l2f=%0d reserved=%0d", n_f2l, n_l2f, n_reserved - res0);
    checks++;
    if (n_reserved - res0 == 0) begin
      failures++; $display("FAIL no priority reservation under unstable types");
    end
    $display("paths A=%0d B1=%0d B2=%0d C=%0d D=%0d", n_path[0], n_path[1], n_path[2], n_path[3], n_path[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
