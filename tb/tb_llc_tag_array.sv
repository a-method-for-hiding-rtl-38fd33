// tb_llc_tag_array: self-checking test of the row-organised LLC tag array.
// A small array (16 rows) is filled with lines of two pages that share a
// row; CLR lookups, PTR Tag-High match vectors, page-half bits, victim
// choice and the 2-cycle lookup latency are compared with a reference
// model kept in the testbench.
module tb_llc_tag_array;
  import cloak_pkg::*;
  localparam int RB = 4;
  localparam int THW = PA_BITS - PAGE_BITS - RB;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ready, rd_en, rd_valid, clr_hit, victim_valid, wr_en, wr_valid;
  logic [RB-1:0] rd_row, wr_row;
  logic [THW-1:0] rd_th, wr_th, victim_th;
  logic [3:0] rd_tl, wr_tl, clr_way, victim_way;
  logic [1:0] rd_set;
  logic [63:0] ptr_match, row_half;
  logic [5:0] wr_slot;

  llc_tag_array #(.ROW_BITS(RB)) dut (.clk, .rst_n, .ready, .rd_en, .rd_row,
    .rd_tag_high(rd_th), .rd_tag_low(rd_tl), .rd_set, .rd_valid, .clr_hit, .clr_way,
    .ptr_match, .row_page_half(row_half), .victim_way, .victim_valid,
    .victim_tag_high(victim_th), .wr_en, .wr_row, .wr_slot, .wr_valid,
    .wr_tag_high(wr_th), .wr_tag_low(wr_tl));

  // reference: per slot of row 5
  logic        m_v  [64];
  logic [THW-1:0] m_th [64];
  logic [3:0]  m_tl [64];

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic wr(input int slot, input logic v, input logic [THW-1:0] th, input logic [3:0] tl);
    @(negedge clk);
    wr_en = 1; wr_row = 5; wr_slot = 6'(slot); wr_valid = v; wr_th = th; wr_tl = tl;
    m_v[slot] = v; m_th[slot] = th; m_tl[slot] = tl;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic lookup(input logic [THW-1:0] th, input logic [3:0] tl, input logic [1:0] set);
    logic [63:0] exp_match, exp_half;
    logic exp_hit; int exp_way; int free_way; int lat;
    @(negedge clk);
    rd_en = 1; rd_row = 5; rd_th = th; rd_tl = tl; rd_set = set;
    @(negedge clk);
    rd_en = 0;
    lat = 1;
    while (!rd_valid) begin @(negedge clk); lat++; end
    chk("latency", lat, 2);
    exp_hit = 0; exp_way = 0; free_way = -1;
    for (int s = 0; s < 64; s++) begin
      exp_match[s] = m_v[s] && m_th[s] == th;
      exp_half[s]  = m_tl[s][3];
    end
    for (int w = 0; w < 16; w++) begin
      int s; s = set * 16 + w;
      if (m_v[s] && m_th[s] == th && m_tl[s] == tl && !exp_hit) begin exp_hit = 1; exp_way = w; end
      if (!m_v[s] && free_way < 0) free_way = w;
    end
    chk("ptr_match", ptr_match, exp_match);
    chk("row_half", row_half, exp_half);
    chk("clr_hit", clr_hit, exp_hit);
    if (exp_hit) chk("clr_way", clr_way, exp_way);
    if (free_way >= 0) begin
      chk("victim_way", victim_way, free_way);
      chk("victim_valid", victim_valid, 0);
    end else begin
      chk("victim_valid_full", victim_valid, 1);
      chk("victim_th", victim_th, m_th[set*16 + victim_way]);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [THW-1:0] pa, pb;
    rd_en = 0; wr_en = 0; wr_valid = 0; rd_row = 0; wr_row = 0; rd_th = 0; rd_tl = 0;
    rd_set = 0; wr_th = 0; wr_tl = 0; wr_slot = 0;
    for (int s = 0; s < 64; s++) begin m_v[s] = 0; m_th[s] = 0; m_tl[s] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!ready) @(posedge clk);
    pa = THW'(32'h1234567); pb = THW'(32'h0ABCDEF);
    // after reset every line is invalid
    lookup(pa, 4'h3, 2'd1);
    // page A: lines in slots of both regions, page B interleaved
    wr(0, 1, pa, 4'h0);  wr(1, 1, pb, 4'h0);  wr(17, 1, pa, 4'h9);
    wr(32, 1, pa, 4'hC); wr(33, 1, pa, 4'h1); wr(63, 1, pa, 4'hF);
    wr(50, 1, pb, 4'h8);
    lookup(pa, 4'h9, 2'd1);   // CLR hit set 1 way 1
    lookup(pa, 4'h9, 2'd0);   // miss (other set)
    lookup(pb, 4'h8, 2'd3);   // hit set 3 way 2
    lookup(pb, 4'h0, 2'd0);   // hit set 0 way 1
    lookup(pa, 4'h2, 2'd2);   // miss, PTR vector of A
    // invalidate one line, then fill a whole set to see the victim counter
    wr(17, 0, pa, 4'h9);
    lookup(pa, 4'h9, 2'd1);
    for (int w = 0; w < 16; w++) wr(48 + w, 1, pb ^ THW'(w), 4'(w));
    lookup(pb, 4'h5, 2'd3);
    lookup(pb ^ THW'(7), 4'h7, 2'd3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
