// nvm_data_array: behavioural model of the STT-RAM data array of one LLC
// slice. The real part is a process-specific non-volatile memory macro
// (with its sense amplifiers); this model reproduces its function and
// timing, not its circuit.
//
// Organisation: 2^ROW_BITS physical rows of 4KB, each holding 64 lines of
// 64B; a line is addressed by (row, slot). Three operations:
//   * line read  (rd_line_en): returns one line RD_LAT cycles later on
//     rd_line_valid/rd_line_data, together with an opaque tag rd_line_id
//     that the caller uses to route the response;
//   * row read   (rd_row_en): returns all 64 lines of a row RD_LAT cycles
//     later on row_valid/row_data, used to promote a page into a Page
//     Buffer with a single array read;
//   * line write (wr_en).
// The array cannot be pipelined: after an operation is accepted, `busy`
// stays high for RD_BUSY cycles (reads) or WR_BUSY cycles (writes) and no
// new operation may be issued. The remainder of the read latency
// (RD_LAT - RD_BUSY) is pipelined, so a second read can be started before
// the first has delivered its data.
//
// Timing defaults follow the evaluated configuration: 22-cycle data access
// of which 10 cycles are not pipelined. WR_BUSY = 25 is this design's
// estimate: the published write round trip is 15 cycles longer than the
// read round trip (78 vs 63), added to the 10 blocked read cycles.
// Data contents are not reset (non-volatile).
module nvm_data_array
  import cloak_pkg::*;
#(
  parameter int unsigned ROW_BITS = 12,
  parameter int unsigned RD_LAT   = 22,
  parameter int unsigned RD_BUSY  = 10,
  parameter int unsigned WR_BUSY  = 25,
  parameter int unsigned ID_W     = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  output logic                        busy,
  input  logic                        rd_line_en,
  input  logic                        rd_row_en,
  input  logic                        wr_en,
  input  logic [ROW_BITS-1:0]         row,
  input  logic [SLOT_W-1:0]           slot,
  input  logic [ID_W-1:0]             rd_id,
  input  logic [LINE_W-1:0]           wr_data,
  output logic                        rd_line_valid,
  output logic [ID_W-1:0]             rd_line_id,
  output logic [LINE_W-1:0]           rd_line_data,
  output logic                        row_valid,
  output logic [LINES_PER_ROW-1:0][LINE_W-1:0] row_data
);
  localparam int unsigned ROWS = 1 << ROW_BITS;

  // one word per physical row: every access reads or writes one row word
  logic [LINES_PER_ROW-1:0][LINE_W-1:0] mem [ROWS];

  logic [$clog2(WR_BUSY+1)-1:0] busy_cnt;
  logic [$clog2(RD_LAT+1)-1:0]  row_cnt;

  // ---------------- non-pipelined occupancy ----------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_cnt <= '0;
    end else if (rd_line_en || rd_row_en) begin
      busy_cnt <= ($bits(busy_cnt))'(RD_BUSY - 1);
    end else if (wr_en) begin
      busy_cnt <= ($bits(busy_cnt))'(WR_BUSY - 1);
    end else if (busy_cnt != 0) begin
      busy_cnt <= busy_cnt - 1'b1;
    end
  end
  assign busy = (busy_cnt != 0);

  // ---------------- array --------------------------------------------
  always_ff @(posedge clk) begin
    if (wr_en) mem[row][slot] <= wr_data;
  end

  // ---------------- line-read pipeline -------------------------------
  logic [RD_LAT-1:0]             pv;
  logic [ID_W-1:0]               pid  [RD_LAT];
  logic [LINE_W-1:0]             pdat [RD_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pv <= '0;
    else        pv <= {pv[RD_LAT-2:0], rd_line_en};
  end

  always_ff @(posedge clk) begin
    pid[0]  <= rd_id;
    pdat[0] <= mem[row][slot];
    for (int i = 1; i < RD_LAT; i++) begin
      pid[i]  <= pid[i-1];
      pdat[i] <= pdat[i-1];
    end
  end

  assign rd_line_valid = pv[RD_LAT-1];
  assign rd_line_id    = pid[RD_LAT-1];
  assign rd_line_data  = pdat[RD_LAT-1];

  // ---------------- row read -----------------------------------------
  // Only one row read can be in flight (a new one needs the array idle for
  // RD_BUSY cycles and the single caller waits for the data).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_cnt   <= '0;
      row_valid <= 1'b0;
    end else begin
      row_valid <= 1'b0;
      if (rd_row_en) begin
        row_cnt <= ($bits(row_cnt))'(RD_LAT - 1);
      end else if (row_cnt != 0) begin
        row_cnt <= row_cnt - 1'b1;
        if (row_cnt == 1) row_valid <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_row_en) row_data <= mem[row];
  end

  // ---------------- protocol checks ----------------------------------
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({rd_line_en, rd_row_en, wr_en}))
    else $error("nvm_data_array: more than one operation in a cycle");
  a_not_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_line_en || rd_row_en || wr_en) |-> !busy)
    else $error("nvm_data_array: operation issued while busy");
endmodule
