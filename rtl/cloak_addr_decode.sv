// cloak_addr_decode: splits a physical address into the fields of the Cloak
// LLC layout.
//
// Cloak indexes the LLC so that all lines of a 4KB page fall into one
// physical row: the row is chosen by page-number bits only (Row Index), the
// set inside the row by page-offset bits 7:6 (Set Index), and the tag is the
// remaining page-number bits (Tag-High) plus page-offset bits 11:8
// (Tag-Low). A Page Transfer Request (PTR) matches on Tag-High only; a Cache
// Line Request (CLR) matches on Tag-High and Tag-Low.
//
// Purely combinational. ROW_BITS = 12 gives the 16MB slice that is
// evaluated (row bits 23:12, Tag-High 47:24); ROW_BITS = 13 reproduces the
// published 32MB example (row bits 24:12, Tag-High 47:25). The positions of
// Tag-Low, Set Index and offset are the published ones. The page-half bit
// (bit 11) is used by the promotion conflict rule; the region (2KB half of
// the row) a line occupies is the upper set-index bit, this design's own
// slot ordering.
module cloak_addr_decode
  import cloak_pkg::*;
#(
  parameter int unsigned ROW_BITS = 12
) (
  input  logic [PA_BITS-1:0]                 addr,
  output logic [PA_BITS-PAGE_BITS-ROW_BITS-1:0] tag_high,
  output logic [ROW_BITS-1:0]                row,
  output logic [TAGLO_W-1:0]                 tag_low,
  output logic [SET_BITS-1:0]                set_idx,
  output logic [LINE_BITS-1:0]               offset,
  output logic [PPN_W-1:0]                   ppn,
  output logic                               page_half,
  output logic                               region
);
  always_comb begin
    tag_high  = addr[PA_BITS-1 : PAGE_BITS+ROW_BITS];
    row       = addr[PAGE_BITS+ROW_BITS-1 : PAGE_BITS];
    tag_low   = addr[PAGE_BITS-1 : LINE_BITS+SET_BITS];
    set_idx   = addr[LINE_BITS+SET_BITS-1 : LINE_BITS];
    offset    = addr[LINE_BITS-1:0];
    ppn       = addr[PA_BITS-1 : PAGE_BITS];
    page_half = addr[PAGE_BITS-1];
    region    = set_idx[SET_BITS-1];
  end
endmodule
