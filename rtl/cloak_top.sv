// cloak_top: the Cloak additions of a four-core chip, wired together.
//
// Per core there is the PTR hint logic of the L1 data TLB (tlb_ptr_hint);
// the L2/L3 interface network (three l2l3_xbar crossbars) carries CLRs
// from the cores' L2s to the LLC slices, PTRs from the hint logic to the
// slices, and read responses back; and there are NUM_SLICES Cloak LLC
// slices (cloak_slice), one per core, each 16MB of STT-RAM with 20 page
// buffers by default.
//
// A whole page maps to one slice, as the published design requires; which
// page-number bits choose the slice is not published: here it is the
// SLICE_BITS bits just above the row index (bits 25:24 at the defaults).
// Those bits stay part of Tag-High inside a slice, which costs two tag
// bits per line but keeps each slice independent of the slicing.
//
// Not part of this module, and therefore ports: the cores, their L1/L2
// caches and TLBs (L2 requests clr_*, responses resp_*, TLB fill/hit events
// tlb_*), and main memory (LLC misses mem_*). The core field of a CLR is
// filled in here from the port it arrived on. All responses to a core pass
// through a round-robin arbiter over the slices.
//
// Timing: the network adds no cycles (it is combinational); a PTR reaches
// its slice 6 cycles after the TLB event; a slice answers a PB hit 5
// cycles and an NVM hit 27 cycles after accepting the CLR. `ready` rises
// 2^ROW_BITS cycles after reset, when all tag arrays are cleared.
// chunk_ptr (huge-page chunk PTR per core) is left for observation only.
// Lint notes: rst_n is reported as used both synchronously and
// asynchronously; the synchronous use is only the `disable iff` of the
// handshake assertions, not logic. Valid-to-ready paths through the
// slices and crossbars are combinational, but no ready feeds back into a
// valid, so they form no loop.
module cloak_top
  import cloak_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 4,
  parameter int unsigned SLICE_BITS = 2,
  parameter int unsigned ROW_BITS   = 12,
  parameter int unsigned NUM_PB     = 20,
  parameter int unsigned L1_ENTRIES = 64,
  localparam int unsigned NUM_SLICES = 1 << SLICE_BITS,
  localparam int unsigned ENT_W = $clog2(L1_ENTRIES),
  localparam int unsigned CW = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1,
  localparam int unsigned SW = (SLICE_BITS > 0) ? SLICE_BITS : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               ready,
  input  logic [SLOT_W:0]    cfg_threshold,
  input  logic [9:0]         cfg_activation_period,
  // L2 side, per core
  input  logic [NUM_CORES-1:0] clr_valid,
  input  clr_req_t           clr_req   [NUM_CORES],
  output logic [NUM_CORES-1:0] clr_ready,
  output logic [NUM_CORES-1:0] resp_valid,
  output clr_resp_t          resp      [NUM_CORES],
  input  logic [NUM_CORES-1:0] resp_ready,
  // L1 TLB side, per core
  input  logic [NUM_CORES-1:0] tlb_fill_valid,
  input  logic [ENT_W-1:0]   tlb_fill_entry [NUM_CORES],
  input  page_size_e         tlb_fill_size  [NUM_CORES],
  input  logic [NUM_CORES-1:0] tlb_fill_l2tlb_hit,
  input  logic [NUM_CORES-1:0] tlb_fill_accessed,
  input  logic [NUM_CORES-1:0] tlb_fill_dirty,
  input  logic [PA_BITS-1:0] tlb_fill_pa    [NUM_CORES],
  input  logic [NUM_CORES-1:0] tlb_hit_valid,
  input  logic [ENT_W-1:0]   tlb_hit_entry  [NUM_CORES],
  input  logic [PA_BITS-1:0] tlb_hit_pa     [NUM_CORES],
  output logic [NUM_CORES-1:0] ptr_dropped,
  // main memory side, per slice
  output logic [NUM_SLICES-1:0] mem_valid,
  output mem_req_t           mem_req   [NUM_SLICES],
  input  logic [NUM_SLICES-1:0] mem_ready,
  // per-slice events
  output slice_events_t      events    [NUM_SLICES]
);
  localparam int unsigned SLICE_LSB = PAGE_BITS + ROW_BITS;

  function automatic logic [SW-1:0] slice_of(input logic [PA_BITS-1:0] pa);
    return (SLICE_BITS > 0) ? SW'(pa >> SLICE_LSB) : '0;
  endfunction

  // ---------------- PTR hint logic, one per core ---------------------
  logic [NUM_CORES-1:0] hint_valid, hint_ready, chunk_ptr;
  logic [PA_BITS-1:0]   hint_pa  [NUM_CORES];
  ptr_req_t             hint_req [NUM_CORES];
  logic [SW-1:0]        hint_dst [NUM_CORES];
  clr_req_t             clr_in   [NUM_CORES];
  logic [SW-1:0]        clr_dst  [NUM_CORES];

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    tlb_ptr_hint #(.L1_ENTRIES(L1_ENTRIES)) u_hint (
      .clk, .rst_n,
      .fill_valid(tlb_fill_valid[c]), .fill_entry(tlb_fill_entry[c]), .fill_size(tlb_fill_size[c]),
      .fill_l2tlb_hit(tlb_fill_l2tlb_hit[c]), .fill_accessed(tlb_fill_accessed[c]),
      .fill_dirty(tlb_fill_dirty[c]), .fill_pa(tlb_fill_pa[c]),
      .hit_valid(tlb_hit_valid[c]), .hit_entry(tlb_hit_entry[c]), .hit_pa(tlb_hit_pa[c]),
      .ptr_valid(hint_valid[c]), .ptr_pa(hint_pa[c]), .ptr_ready(hint_ready[c]),
      .ptr_dropped(ptr_dropped[c]), .chunk_ptr(chunk_ptr[c]));
    always_comb begin
      hint_req[c].core = CORE_W'(c);
      hint_req[c].addr = hint_pa[c];
      hint_dst[c]      = slice_of(hint_pa[c]);
      clr_in[c]        = clr_req[c];
      clr_in[c].core   = CORE_W'(c);
      clr_dst[c]       = slice_of(clr_req[c].addr);
    end
  end

  // ---------------- L2/L3 interface network --------------------------
  logic [NUM_SLICES-1:0] s_clr_valid, s_clr_ready, s_ptr_valid, s_ptr_ready;
  logic [NUM_SLICES-1:0] s_resp_valid, s_resp_ready, s_ready;
  clr_req_t              s_clr  [NUM_SLICES];
  ptr_req_t              s_ptr  [NUM_SLICES];
  clr_resp_t             s_resp [NUM_SLICES];
  logic [CW-1:0]         s_resp_dst [NUM_SLICES];
  logic [CW-1:0]         clr_from [NUM_SLICES], ptr_from [NUM_SLICES];
  logic [SW-1:0]         resp_from [NUM_CORES];

  l2l3_xbar #(.N_SRC(NUM_CORES), .N_DST(NUM_SLICES), .T(clr_req_t)) u_clr_net (
    .clk, .rst_n, .src_valid(clr_valid), .src_dst(clr_dst), .src_data(clr_in),
    .src_ready(clr_ready), .dst_valid(s_clr_valid), .dst_data(s_clr), .dst_src(clr_from),
    .dst_ready(s_clr_ready));

  l2l3_xbar #(.N_SRC(NUM_CORES), .N_DST(NUM_SLICES), .T(ptr_req_t)) u_ptr_net (
    .clk, .rst_n, .src_valid(hint_valid), .src_dst(hint_dst), .src_data(hint_req),
    .src_ready(hint_ready), .dst_valid(s_ptr_valid), .dst_data(s_ptr), .dst_src(ptr_from),
    .dst_ready(s_ptr_ready));

  for (genvar s = 0; s < NUM_SLICES; s++) begin : g_dst
    assign s_resp_dst[s] = CW'(s_resp[s].core);
  end

  l2l3_xbar #(.N_SRC(NUM_SLICES), .N_DST(NUM_CORES), .T(clr_resp_t)) u_resp_net (
    .clk, .rst_n, .src_valid(s_resp_valid), .src_dst(s_resp_dst), .src_data(s_resp),
    .src_ready(s_resp_ready), .dst_valid(resp_valid), .dst_data(resp), .dst_src(resp_from),
    .dst_ready(resp_ready));

  // ---------------- LLC slices ---------------------------------------
  for (genvar s = 0; s < NUM_SLICES; s++) begin : g_slice
    cloak_slice #(.ROW_BITS(ROW_BITS), .NUM_PB(NUM_PB)) u_slice (
      .clk, .rst_n, .ready(s_ready[s]),
      .cfg_threshold, .cfg_activation_period,
      .clr_valid(s_clr_valid[s]), .clr_req(s_clr[s]), .clr_ready(s_clr_ready[s]),
      .ptr_valid(s_ptr_valid[s]), .ptr_req(s_ptr[s]), .ptr_ready(s_ptr_ready[s]),
      .resp_valid(s_resp_valid[s]), .resp(s_resp[s]), .resp_ready(s_resp_ready[s]),
      .mem_valid(mem_valid[s]), .mem_req(mem_req[s]), .mem_ready(mem_ready[s]),
      .events(events[s]));
  end

  assign ready = &s_ready;
endmodule
