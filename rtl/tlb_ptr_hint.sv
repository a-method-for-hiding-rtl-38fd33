// tlb_ptr_hint: the logic Cloak adds next to a core's L1 data TLB to send
// Page Transfer Requests (PTRs) to the LLC.
//
// On an L1 TLB fill, the page is taken to have been referenced before if
// the translation hit in the L2 TLB or the PTE has its Accessed or Dirty bit
// set; only then is a PTR carrying the physical address of the access sent
// (the published fill flow chart). For huge pages (2MB, 1GB) a PTR asks for
// the one 4KB chunk that holds the address: each L1 TLB entry gets a chunk
// field recording the most recently requested 4KB chunk (9 bits of address
// for 2MB pages, 18 bits for 1GB pages, as published; the field here is 18
// bits for every entry). An L1 TLB hit to a huge page in a different chunk
// sends a new PTR for that chunk and records it.
//
// Interface: fill and hit events come from the (unmodified) L1 TLB, with
// the index of the L1 TLB entry involved. A PTR leaves PTR_LAT cycles after
// the event (6 cycles, the published PTR signal latency) on ptr_valid /
// ptr_pa and stays there until ptr_ready. PTRs are hints: when a newer PTR
// arrives while an older one is still waiting, the older one is dropped
// and ptr_dropped pulses (this design's choice; the published text does
// not discuss back-pressure on PTRs). A fill has priority over a hit event
// in the same cycle. The 64-entry default is the
// evaluated L1 TLB size.
module tlb_ptr_hint
  import cloak_pkg::*;
#(
  parameter int unsigned L1_ENTRIES = 64,
  parameter int unsigned PTR_LAT    = 6,     // at least 2
  localparam int unsigned ENT_W = $clog2(L1_ENTRIES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // L1 TLB fill
  input  logic                 fill_valid,
  input  logic [ENT_W-1:0]     fill_entry,
  input  page_size_e           fill_size,
  input  logic                 fill_l2tlb_hit,
  input  logic                 fill_accessed,
  input  logic                 fill_dirty,
  input  logic [PA_BITS-1:0]   fill_pa,
  // L1 TLB hit
  input  logic                 hit_valid,
  input  logic [ENT_W-1:0]     hit_entry,
  input  logic [PA_BITS-1:0]   hit_pa,
  // PTR out
  output logic                 ptr_valid,
  output logic [PA_BITS-1:0]   ptr_pa,
  input  logic                 ptr_ready,
  output logic                 ptr_dropped,
  output logic                 chunk_ptr    // current event is a huge-page chunk PTR
);
  localparam int unsigned CHUNK_W = 18;     // 1GB page / 4KB chunks

  page_size_e             ent_size  [L1_ENTRIES];
  logic [CHUNK_W-1:0]     ent_chunk [L1_ENTRIES];

  function automatic logic [CHUNK_W-1:0] chunk_of(input page_size_e sz,
                                                  input logic [PA_BITS-1:0] pa);
    case (sz)
      PG_2M:   return CHUNK_W'(pa[PAGE_BITS +: 9]);
      PG_1G:   return pa[PAGE_BITS +: CHUNK_W];
      default: return '0;
    endcase
  endfunction

  // ---------------- trigger decision -----------------------------------
  logic fill_trig, hit_trig, trig;
  logic [PA_BITS-1:0] trig_pa;

  always_comb begin
    fill_trig = fill_valid && (fill_l2tlb_hit || fill_accessed || fill_dirty);
    hit_trig  = !fill_valid && hit_valid && ent_size[hit_entry] != PG_4K
                && chunk_of(ent_size[hit_entry], hit_pa) != ent_chunk[hit_entry];
    trig      = fill_trig || hit_trig;
    trig_pa   = fill_valid ? fill_pa : hit_pa;
    chunk_ptr = hit_trig;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < L1_ENTRIES; i++) begin
        ent_size[i]  <= PG_4K;
        ent_chunk[i] <= '0;
      end
    end else if (fill_valid) begin
      ent_size[fill_entry]  <= fill_size;
      ent_chunk[fill_entry] <= chunk_of(fill_size, fill_pa);
    end else if (hit_trig) begin
      ent_chunk[hit_entry]  <= chunk_of(ent_size[hit_entry], hit_pa);
    end
  end

  // ---------------- PTR signal latency ---------------------------------
  // PTR_LAT-1 delay stages, then an output register that holds the PTR
  // until the network takes it
  logic [PTR_LAT-2:0]   dv;
  logic [PA_BITS-1:0]   dpa [PTR_LAT-1];
  logic                 arrive;

  assign arrive = dv[PTR_LAT-2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv        <= '0;
      ptr_valid <= 1'b0;
    end else begin
      dv <= (PTR_LAT-1)'({dv, trig});
      if (arrive)                      ptr_valid <= 1'b1;
      else if (ptr_valid && ptr_ready) ptr_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    dpa[0] <= trig_pa;
    for (int i = 1; i < PTR_LAT - 1; i++) dpa[i] <= dpa[i-1];
    if (arrive) ptr_pa <= dpa[PTR_LAT-2];
  end

  // a waiting PTR that is overtaken by a newer one is lost
  assign ptr_dropped = arrive && ptr_valid && !ptr_ready;
endmodule
