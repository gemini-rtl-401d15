// gemini_pkg: types and constants shared by the Gemini DRAM cache controller.
//
// A DRAM cache set holds WAYS = 16 data lines of 64 bytes. Every line has a
// 4-byte tag (32 bits): the address tag, the reference bit A, the priority
// bit H, the two-bit type filter C and a state field. The field order follows
// the tag layout of the design (Address Tag, A, H, C, State). The widths of
// the address tag and the content of the state field (valid, dirty and the
// block's last observed type) are this design's choice; only the 4-byte tag
// size and the A/H/C fields come from the original description.
// The 16 tags of a set form a 64-byte tag batch, which is the unit moved
// between the tag rows of the DRAM cache and the SRAM tag cache.
package gemini_pkg;

  localparam int unsigned WAYS       = 16;   // data lines per cache set
  localparam int unsigned POS_W      = 4;    // log2(WAYS)
  localparam int unsigned LINE_W     = 512;  // 64-byte data line
  localparam int unsigned TAG_BITS   = 32;   // 4-byte tag
  localparam int unsigned ATAG_W     = 25;   // address tag field of a tag
  localparam int unsigned LOC_W      = 32;   // packed DRAM location

  // One tag of the tag batch (32 bits).
  typedef struct packed {
    logic [ATAG_W-1:0] atag;   // address tag: {bits above the set index, offset in section}
    logic              a;      // reference bit (recency, used by RV-CLOCK)
    logic              h;      // priority bit, 1 = leading / high priority
    logic [1:0]        c;      // frequent type transition filter
    logic              valid;  // state: line holds a block
    logic              dirty;  // state: line differs from main memory
    logic              ltype;  // state: type seen on the last access, 1 = leading
  } tag_t;

  typedef tag_t [WAYS-1:0] batch_t;

  // Location of a 64-byte unit in a DRAM device.
  typedef struct packed {
    logic [3:0]  channel;
    logic [4:0]  bank;
    logic [17:0] row;
    logic [4:0]  col;      // 64-byte column within a 2KB row
  } dram_loc_t;

  // Request to a DRAM port (DRAM-cache data bank, DRAM-cache tag bank or
  // main memory). addr is a dram_loc_t for the DRAM cache and a block
  // address for main memory.
  typedef struct packed {
    logic              we;
    logic [LOC_W-1:0]  addr;
    logic [LINE_W-1:0] wdata;
  } mem_req_t;

  // Access paths of a request (naming of the request breakdown):
  //   A  : tag cache hit, DRAM cache hit
  //   B1 : tag cache miss, DRAM cache hit, tag and data fetched concurrently
  //   B2 : tag cache miss, DRAM cache hit, data read after the tag batch
  //   C  : tag cache hit, DRAM cache miss
  //   D  : tag cache miss, DRAM cache miss
  typedef enum logic [2:0] {
    PATH_A  = 3'd0,
    PATH_B1 = 3'd1,
    PATH_B2 = 3'd2,
    PATH_C  = 3'd3,
    PATH_D  = 3'd4
  } path_e;

  // Outcome of the mapping policy for a block found in its set.
  typedef enum logic [1:0] {
    POL_STAY      = 2'd0,  // keep the block where it is
    POL_CLEAR_REF = 2'd1,  // keep it, clear the static occupant's reference bit
    POL_MIGRATE   = 2'd2   // move it to its static position
  } pol_action_e;

  // Per-request report of what the controller did.
  typedef struct packed {
    path_e path;
    logic  leading;        // request classified as a leading block
    logic  f2l;            // following -> leading transition
    logic  l2f;            // leading -> following transition
    logic  reserved;       // priority kept high by the filter on a transition
    logic  migrate;        // block moved to its static position
    logic  clear_ref;      // static occupant only lost its reference bit
    logic  wb_dirty;       // dirty victim written back to main memory
    logic  full_range;     // RV-CLOCK ran over all lines (leading not masked)
    logic  evict_leading;  // a leading block was evicted by a following insertion
    logic  static_evict;   // leading insertion replaced a valid static occupant
    logic  tc_wb;          // evicted tag-cache entry written back to DRAM
  } event_t;

endpackage
