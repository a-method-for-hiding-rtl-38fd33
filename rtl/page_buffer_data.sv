// page_buffer_data: the SRAM data storage of the Cloak Page Buffers (PBs).
//
// There are NUM_PB buffers of 2KB each, i.e. half a 4KB page: 32 slots of
// one 64B line. A line of the physical row is stored in the PB slot equal
// to its position inside its 2KB region of the row, so no reordering or
// address tags are needed; which region a slot's line came from is kept in
// the Region bits of the PB Tags (pb_tags), not here.
//
// Ports:
//   * read  (rd_en, rd_pb, rd_slot): data on rd_data one cycle later;
//   * line write (wr_line_en): one slot, used to keep a PB copy coherent
//     when an L2 victim is written into the LLC;
//   * region write (wr_region_en): up to 32 slots of one PB at once under
//     wr_mask, used by promotion, which copies one 2KB region of a row per
//     cycle (two cycles for a whole page).
// A region write and a line write must not happen in the same cycle (the
// slice controller never does both); the region write would win.
//
// NUM_PB = 20 is the evaluated configuration.
module page_buffer_data
  import cloak_pkg::*;
#(
  parameter int unsigned NUM_PB = 20,
  localparam int unsigned PB_W = (NUM_PB > 1) ? $clog2(NUM_PB) : 1
) (
  input  logic                               clk,
  input  logic                               rd_en,
  input  logic [PB_W-1:0]                    rd_pb,
  input  logic [PB_SLOT_W-1:0]               rd_slot,
  output logic [LINE_W-1:0]                  rd_data,
  input  logic                               wr_line_en,
  input  logic [PB_W-1:0]                    wr_line_pb,
  input  logic [PB_SLOT_W-1:0]               wr_line_slot,
  input  logic [LINE_W-1:0]                  wr_line_data,
  input  logic                               wr_region_en,
  input  logic [PB_W-1:0]                    wr_region_pb,
  input  logic [PB_SLOTS-1:0]                wr_mask,
  input  logic [PB_SLOTS-1:0][LINE_W-1:0]    wr_region_data
);
  // one word per PB; a single write port with a per-slot enable serves both
  // the line write and the region write
  logic [PB_SLOTS-1:0][LINE_W-1:0] mem [NUM_PB];
  logic [PB_W-1:0]                 w_pb;
  logic [PB_SLOTS-1:0]             w_en;
  logic [PB_SLOTS-1:0][LINE_W-1:0] w_data;

  always_comb begin
    w_pb = wr_region_en ? wr_region_pb : wr_line_pb;
    for (int s = 0; s < PB_SLOTS; s++) begin
      if (wr_region_en) begin
        w_en[s]   = wr_mask[s];
        w_data[s] = wr_region_data[s];
      end else begin
        w_en[s]   = wr_line_en && wr_line_slot == PB_SLOT_W'(s);
        w_data[s] = wr_line_data;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int s = 0; s < PB_SLOTS; s++)
      if (w_en[s]) mem[w_pb][s] <= w_data[s];
    if (rd_en) rd_data <= mem[rd_pb][rd_slot];
  end
endmodule
