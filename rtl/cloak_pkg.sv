// cloak_pkg: constants and types shared by the Cloak last-level-cache slice.
//
// Cloak puts the lines of one 4KB page into one physical row of a
// non-volatile (STT-RAM) LLC slice, so that on certain L1 TLB fills the
// LLC-resident lines of the page can be copied with one row read into a
// small SRAM Page Buffer (PB), which then serves later reads at SRAM speed.
//
// Address layout (48-bit physical address, 4KB pages, 64B lines, 16 ways,
// 4 sets per 4KB row):
//   [47 : 12+ROW_BITS]  Tag-High   (part of the page number)
//   [11+ROW_BITS : 12]  Row Index  (selects the physical row)
//   [11 : 8]            Tag-Low    (part of the page offset)
//   [7 : 6]             Set Index  (set within the row)
//   [5 : 0]             line offset
// The field positions of the low part (11:8, 7:6, 5:0) are the published
// ones. ROW_BITS follows from the slice size: 12 for the evaluated 16MB
// slice (4096 rows); the published 32MB worked example uses 13 (bits 24:12).
//
// A line's slot inside its row is {set, way}; the row splits into two 2KB
// regions, region = slot[5] (the upper set-index bit). The slot ordering is
// this design's choice; the published text only says a row holds 4 sets of
// 16 ways and is split into two 2KB halves.
package cloak_pkg;

  // ---------------- geometry -------------------------------------------
  localparam int unsigned PA_BITS      = 48;
  localparam int unsigned PAGE_BITS    = 12;           // 4KB page
  localparam int unsigned LINE_BITS    = 6;            // 64B line
  localparam int unsigned LINE_W       = 512;          // line data width
  localparam int unsigned PPN_W        = PA_BITS - PAGE_BITS;  // 36
  localparam int unsigned WAYS         = 16;
  localparam int unsigned SET_BITS     = 2;            // 4 sets per row
  localparam int unsigned SETS_PER_ROW = 1 << SET_BITS;
  localparam int unsigned LINES_PER_ROW = WAYS * SETS_PER_ROW;  // 64
  localparam int unsigned SLOT_W       = $clog2(LINES_PER_ROW); // 6
  localparam int unsigned TAGLO_W      = PAGE_BITS - LINE_BITS - SET_BITS; // 4
  localparam int unsigned PB_SLOTS     = LINES_PER_ROW / 2;   // 2KB PB = 32 lines
  localparam int unsigned PB_SLOT_W    = $clog2(PB_SLOTS);    // 5

  // ---------------- request / response types ---------------------------
  typedef enum logic [1:0] {
    OP_READ  = 2'd0,   // CLR read: an L2 miss
    OP_WRITE = 2'd1,   // CLR write: an L2 victim installed into the LLC
    OP_INV   = 2'd2    // invalidation (external probe or promotion to L2)
  } clr_op_e;

  localparam int unsigned CORE_W = 2;   // room for 4 requesters

  typedef struct packed {
    clr_op_e                 op;
    logic [CORE_W-1:0]       core;
    logic [PA_BITS-1:0]      addr;
    logic [LINE_W-1:0]       data;
  } clr_req_t;

  typedef struct packed {
    logic [CORE_W-1:0]       core;
    logic [PA_BITS-1:0]      addr;
  } ptr_req_t;

  // page size of an L1 TLB entry
  typedef enum logic [1:0] {
    PG_4K = 2'd0,
    PG_2M = 2'd1,
    PG_1G = 2'd2
  } page_size_e;

  // where a read response came from
  typedef enum logic {
    SRC_NVM = 1'b0,
    SRC_PB  = 1'b1
  } resp_src_e;

  typedef struct packed {
    logic [CORE_W-1:0]       core;
    logic [PA_BITS-1:0]      addr;
    resp_src_e               src;
    logic [LINE_W-1:0]       data;
  } clr_resp_t;

  // LLC miss forwarded to main memory (memory answers the L2 directly,
  // the LLC being a victim cache of the L2s)
  typedef struct packed {
    logic [CORE_W-1:0]       core;
    logic [PA_BITS-1:0]      addr;
  } mem_req_t;

  // one-cycle event flags of a slice, for observation and statistics
  typedef struct packed {
    logic clr_miss;        // CLR read missed the LLC, sent to memory
    logic nvm_hit;         // CLR read served from the NVM data array
    logic pb_hit;          // CLR read served from a page buffer
    logic pb_parallel;     // PB hit served while an NVM read was in flight
    logic nvm_stall;       // controller waited for the non-pipelined array
    logic pb_write;        // CLR write also updated a PB copy
    logic residency_dec;   // LLC invalidate/evict decremented a residency
    logic llc_evict;       // CLR write replaced a valid LLC line
    logic ptr_in;          // PTR accepted
    logic ptr_present;     // PTR page already in a PB: nothing done
    logic ptr_below_thr;   // PTR page population below threshold
    logic ptr_no_pb;       // no PB available for replacement
    logic promote;         // a page was promoted into a PB
    logic promote_conflict;// promotion had a slot claimed by both regions
    logic pb_replace;      // promotion replaced a PB that held another page
  } slice_events_t;

endpackage
