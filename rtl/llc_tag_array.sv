// llc_tag_array: SRAM tag array of one Cloak LLC slice.
//
// The array is organised by physical row: one row holds the tags of the
// 64 lines (4 sets x 16 ways) that share a 4KB row of the NVM data array,
// i.e. all lines of the pages that map to that row. One read returns the
// whole row, which serves both kinds of lookup:
//   * CLR (Cache Line Request): compare Tag-High and Tag-Low against the
//     16 ways of the addressed set -> clr_hit, clr_way;
//   * PTR (Page Transfer Request): compare Tag-High only against all 64
//     lines of the row -> ptr_match (one bit per slot).
// Each entry holds a valid bit, Tag-High and Tag-Low. Slot = {set, way}.
//
// Timing: a read issued in cycle t (rd_en) returns its results, registered,
// in cycle t+2 (rd_valid), matching the 2-cycle tag access of the evaluated
// slice. Reads and writes are single-ported per row in the sense that the
// controller never issues both for the same row in one cycle; a write is
// visible to reads issued in a later cycle.
//
// Reset: after rst_n rises the array walks all rows once, clearing their
// valid bits one row per cycle; `ready` is low until that is done.
//
// Victim selection for installs is this design's own choice (the published
// text does not give the LLC replacement policy): the lowest-numbered
// invalid way of the set, otherwise the way named by a free-running counter.
module llc_tag_array
  import cloak_pkg::*;
#(
  parameter int unsigned ROW_BITS = 12,
  localparam int unsigned TH_W = PA_BITS - PAGE_BITS - ROW_BITS,
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  output logic                    ready,
  // read / lookup
  input  logic                    rd_en,
  input  logic [ROW_BITS-1:0]     rd_row,
  input  logic [TH_W-1:0]         rd_tag_high,
  input  logic [TAGLO_W-1:0]      rd_tag_low,
  input  logic [SET_BITS-1:0]     rd_set,
  output logic                    rd_valid,
  output logic                    clr_hit,
  output logic [WAY_W-1:0]        clr_way,
  output logic [LINES_PER_ROW-1:0] ptr_match,
  output logic [LINES_PER_ROW-1:0] row_page_half,  // Tag-Low MSB of each slot (page bit 11)
  output logic [WAY_W-1:0]        victim_way,
  output logic                    victim_valid,
  output logic [TH_W-1:0]         victim_tag_high,
  // write one entry
  input  logic                    wr_en,
  input  logic [ROW_BITS-1:0]     wr_row,
  input  logic [SLOT_W-1:0]       wr_slot,
  input  logic                    wr_valid,
  input  logic [TH_W-1:0]         wr_tag_high,
  input  logic [TAGLO_W-1:0]      wr_tag_low
);
  localparam int unsigned ROWS = 1 << ROW_BITS;

  typedef struct packed {
    logic               valid;
    logic [TH_W-1:0]    tag_high;
    logic [TAGLO_W-1:0] tag_low;
  } tag_entry_t;

  tag_entry_t [LINES_PER_ROW-1:0] mem [ROWS];

  // ---------------- reset sweep ----------------------------------------
  logic                init_busy;
  logic [ROW_BITS-1:0] init_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_row  <= '0;
    end else if (init_busy) begin
      init_row <= init_row + 1'b1;
      if (init_row == ROW_BITS'(ROWS - 1)) init_busy <= 1'b0;
    end
  end
  assign ready = !init_busy;

  always_ff @(posedge clk) begin
    if (init_busy) begin
      mem[init_row] <= '0;
    end else if (wr_en) begin
      mem[wr_row][wr_slot] <= '{valid: wr_valid, tag_high: wr_tag_high, tag_low: wr_tag_low};
    end
  end

  // ---------------- stage 1: row read ----------------------------------
  tag_entry_t [LINES_PER_ROW-1:0] s1_row;
  logic               s1_valid;
  logic [TH_W-1:0]    s1_th;
  logic [TAGLO_W-1:0] s1_tl;
  logic [SET_BITS-1:0] s1_set;
  logic [WAY_W-1:0]   rr_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      rr_cnt   <= '0;
    end else begin
      s1_valid <= rd_en && !init_busy;
      rr_cnt   <= rr_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      s1_row <= mem[rd_row];
      s1_th  <= rd_tag_high;
      s1_tl  <= rd_tag_low;
      s1_set <= rd_set;
    end
  end

  // ---------------- stage 2: compare -----------------------------------
  logic                    c_hit;
  logic [WAY_W-1:0]        c_way;
  logic [LINES_PER_ROW-1:0] c_ptr, c_half;
  logic                    c_free;
  logic [WAY_W-1:0]        c_free_way, c_victim;

  always_comb begin
    c_hit      = 1'b0;
    c_way      = '0;
    c_free     = 1'b0;
    c_free_way = '0;
    for (int s = 0; s < LINES_PER_ROW; s++) begin
      c_ptr[s]  = s1_row[s].valid && (s1_row[s].tag_high == s1_th);
      c_half[s] = s1_row[s].tag_low[TAGLO_W-1];
    end
    for (int w = WAYS-1; w >= 0; w--) begin
      if (s1_row[{s1_set, WAY_W'(w)}].valid
          && s1_row[{s1_set, WAY_W'(w)}].tag_high == s1_th
          && s1_row[{s1_set, WAY_W'(w)}].tag_low  == s1_tl) begin
        c_hit = 1'b1;
        c_way = WAY_W'(w);
      end
      if (!s1_row[{s1_set, WAY_W'(w)}].valid) begin
        c_free     = 1'b1;
        c_free_way = WAY_W'(w);
      end
    end
    c_victim = c_free ? c_free_way : rr_cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      clr_hit         <= c_hit;
      clr_way         <= c_way;
      ptr_match       <= c_ptr;
      row_page_half   <= c_half;
      victim_way      <= c_victim;
      victim_valid    <= s1_row[{s1_set, c_victim}].valid;
      victim_tag_high <= s1_row[{s1_set, c_victim}].tag_high;
    end
  end
endmodule
