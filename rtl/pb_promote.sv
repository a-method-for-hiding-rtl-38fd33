// pb_promote: decides how the LLC-resident lines of a page are copied from
// their 4KB physical row into a 2KB Page Buffer.
//
// Input is the result of a PTR tag search: ptr_match has one bit per slot
// of the row (64 slots, slot = {set, way}) for every valid line whose
// Tag-High equals the page's, and line_half gives, per slot, which half of
// the 4KB page that line belongs to (address bit 11, the top Tag-Low bit).
// trig_half is the same bit of the address whose TLB fill triggered the
// PTR.
//
// The row is two 2KB regions (slots 0-31 and 32-63); slot s of either
// region maps to PB slot s. Promotion is done in two steps: step 1 writes
// the region-0 lines, step 2 the region-1 lines. When both regions have a
// line of the page in the same slot, one wins: the line from the same page
// half as the triggering address wins over one from the other half;
// otherwise (both or neither in that half) the region-1 line of step 2
// overwrites, as in the published two-step example where the region-1 line
// takes the shared slot.
//
// Outputs: the write masks of the two steps, the Region bits to store,
// the resulting Residency (lines in the PB), the page population in the
// LLC and the threshold decision (population >= threshold; the published
// flow chart uses ">=", and the evaluated threshold is 6 lines), and a flag
// that at least one slot was contested. Purely combinational.
module pb_promote
  import cloak_pkg::*;
(
  input  logic [LINES_PER_ROW-1:0]  ptr_match,
  input  logic [LINES_PER_ROW-1:0]  line_half,
  input  logic                      trig_half,
  input  logic [SLOT_W:0]           threshold,
  output logic [PB_SLOTS-1:0]       step1_mask,
  output logic [PB_SLOTS-1:0]       step2_mask,
  output logic [PB_SLOTS-1:0]       region_bits,
  output logic [SLOT_W:0]           population,
  output logic [PB_SLOT_W:0]        residency,
  output logic                      promote_ok,
  output logic                      conflict
);
  always_comb begin
    population = '0;
    residency  = '0;
    conflict   = 1'b0;
    for (int s = 0; s < LINES_PER_ROW; s++)
      population = population + (SLOT_W+1)'(ptr_match[s]);
    for (int s = 0; s < PB_SLOTS; s++) begin
      logic m0, m1, keep0;
      m0 = ptr_match[s];
      m1 = ptr_match[s + PB_SLOTS];
      // region-0 line keeps the slot only if it is in the trigger's half
      // and the region-1 line is not
      keep0 = m0 && m1 && (line_half[s] == trig_half)
                       && (line_half[s + PB_SLOTS] != trig_half);
      step1_mask[s]  = m0;
      step2_mask[s]  = m1 && !keep0;
      region_bits[s] = step2_mask[s];
      if (m0 && m1) conflict = 1'b1;
      residency = residency + (PB_SLOT_W+1)'(m0 || m1);
    end
    promote_ok = population >= threshold;
  end
endmodule
