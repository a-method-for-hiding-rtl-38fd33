// pb_tags: the Page Buffer Tags of a Cloak LLC slice, one entry per PB.
//
// Each entry holds (as published) the PPN of the page whose lines are in
// the PB, a Replacement counter, a Residency counter (number of valid
// lines in the PB) and 32 Region bits (for each PB slot, which 2KB half of
// the physical row the stored line came from). This design adds one entry
// valid bit so that an empty PB never matches after reset.
//
// Checks (combinational):
//   * page lookup (lk_ppn): is there a PB holding this page? Used by PTRs
//     and, in parallel with the LLC tag read, by CLRs;
//   * region check (q_idx, q_slot, q_region): once the LLC tags have said
//     where the line sits in its row, the PB hits if the Region bit of that
//     slot names the same region. This is the one extra cycle of a PB hit.
//   * victim choice: the lowest-numbered PB that is empty or whose
//     Replacement counter has reached zero (vic_avail = 0 when none).
// Updates (at the clock edge):
//   * load: a page was promoted; Residency = number of lines copied,
//     Replacement = Residency x Activation Period;
//   * access: a PB read (line moved to an L2) decrements Residency, a PB
//     write (L2 victim copied in) increments it (up to 32); on either the Replacement
//     counter is recomputed from the Residency value before the access;
//   * notify: an LLC line was invalidated or evicted; if a PB holds that
//     line (same PPN, Region bit matches), its Residency is decremented;
//   * every other cycle a non-zero Replacement counter counts down by one.
// Residency is 6 bits wide so that a full PB (32 lines) can be counted; the
// published estimate of 5 bits would wrap at 32. The Replacement counter is
// 10 bits as published; the product saturates at its maximum.
module pb_tags
  import cloak_pkg::*;
#(
  parameter int unsigned NUM_PB  = 20,
  parameter int unsigned REPL_W  = 10,
  parameter int unsigned RES_W   = 6,
  localparam int unsigned PB_W = (NUM_PB > 1) ? $clog2(NUM_PB) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [REPL_W-1:0]         activation_period,
  // page lookup
  input  logic [PPN_W-1:0]          lk_ppn,
  output logic                      lk_hit,
  output logic [PB_W-1:0]           lk_idx,
  // region check
  input  logic [PB_W-1:0]           q_idx,
  input  logic [PB_SLOT_W-1:0]      q_slot,
  input  logic                      q_region,
  output logic                      q_region_ok,
  // victim choice
  output logic                      vic_avail,
  output logic [PB_W-1:0]           vic_idx,
  output logic                      vic_in_use,
  // load after promotion
  input  logic                      ld_en,
  input  logic [PB_W-1:0]           ld_idx,
  input  logic [PPN_W-1:0]          ld_ppn,
  input  logic [PB_SLOTS-1:0]       ld_region,
  input  logic [RES_W-1:0]          ld_residency,
  // drop an entry (its PB is being refilled)
  input  logic                      drop_en,
  input  logic [PB_W-1:0]           drop_idx,
  // PB access
  input  logic                      acc_en,
  input  logic                      acc_write,
  input  logic [PB_W-1:0]           acc_idx,
  // LLC invalidate / evict notification
  input  logic                      nt_en,
  input  logic [PPN_W-1:0]          nt_ppn,
  input  logic [PB_SLOT_W-1:0]      nt_slot,
  input  logic                      nt_region,
  output logic                      nt_dec,
  // state, for observation
  output logic [NUM_PB-1:0]         st_valid,
  output logic [NUM_PB-1:0][RES_W-1:0]  st_residency,
  output logic [NUM_PB-1:0][REPL_W-1:0] st_replacement
);
  typedef struct packed {
    logic                valid;
    logic [PPN_W-1:0]    ppn;
    logic [REPL_W-1:0]   repl;
    logic [RES_W-1:0]    res;
    logic [PB_SLOTS-1:0] region;
  } pb_tag_t;

  pb_tag_t tags [NUM_PB];

  function automatic logic [REPL_W-1:0] repl_of(input logic [RES_W-1:0] res,
                                                 input logic [REPL_W-1:0] ap);
    logic [RES_W+REPL_W-1:0] p;
    p = (RES_W+REPL_W)'(res) * (RES_W+REPL_W)'(ap);
    return (p > (RES_W+REPL_W)'({REPL_W{1'b1}})) ? {REPL_W{1'b1}} : p[REPL_W-1:0];
  endfunction

  // ---------------- combinational checks -------------------------------
  logic [NUM_PB-1:0] nt_match;

  always_comb begin
    lk_hit     = 1'b0;
    lk_idx     = '0;
    vic_avail  = 1'b0;
    vic_idx    = '0;
    vic_in_use = 1'b0;
    for (int i = NUM_PB-1; i >= 0; i--) begin
      if (tags[i].valid && tags[i].ppn == lk_ppn) begin
        lk_hit = 1'b1;
        lk_idx = PB_W'(i);
      end
      if (!tags[i].valid || tags[i].repl == '0) begin
        vic_avail  = 1'b1;
        vic_idx    = PB_W'(i);
        vic_in_use = tags[i].valid;
      end
      nt_match[i] = nt_en && tags[i].valid && tags[i].ppn == nt_ppn
                    && tags[i].region[nt_slot] == nt_region;
      st_valid[i]       = tags[i].valid;
      st_residency[i]   = tags[i].res;
      st_replacement[i] = tags[i].repl;
    end
    q_region_ok = tags[q_idx].region[q_slot] == q_region;
    nt_dec      = |nt_match;
  end

  // ---------------- state update ---------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_PB; i++) tags[i] <= '0;
    end else begin
      for (int i = 0; i < NUM_PB; i++) begin
        logic [RES_W-1:0] res;
        res = tags[i].res;
        if (nt_match[i] && res != '0) res = res - 1'b1;
        if (ld_en && ld_idx == PB_W'(i)) begin
          tags[i].valid  <= 1'b1;
          tags[i].ppn    <= ld_ppn;
          tags[i].region <= ld_region;
          tags[i].res    <= ld_residency;
          tags[i].repl   <= repl_of(ld_residency, activation_period);
        end else if (drop_en && drop_idx == PB_W'(i)) begin
          tags[i].valid <= 1'b0;
          tags[i].repl  <= '0;
          tags[i].res   <= '0;
        end else if (acc_en && acc_idx == PB_W'(i)) begin
          tags[i].repl <= repl_of(tags[i].res, activation_period);
          if (acc_write) begin
            if (res < RES_W'(PB_SLOTS)) res = res + 1'b1;
          end else begin
            if (res != '0) res = res - 1'b1;
          end
          tags[i].res <= res;
        end else begin
          if (tags[i].repl != '0) tags[i].repl <= tags[i].repl - 1'b1;
          tags[i].res <= res;
        end
      end
    end
  end
endmodule
