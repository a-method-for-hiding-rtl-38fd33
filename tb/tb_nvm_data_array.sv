// tb_nvm_data_array: checks the NVM array model: write then read back,
// 22-cycle read latency, 10-cycle non-pipelined occupancy for reads and
// 25 for writes, two reads overlapping in the pipelined part, and a full
// row read.
module tb_nvm_data_array;
  import cloak_pkg::*;
  localparam int RB = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic busy, rd_line_en, rd_row_en, wr_en, rd_line_valid, row_valid;
  logic [RB-1:0] row; logic [5:0] slot; logic [7:0] rd_id, rd_line_id;
  logic [511:0] wr_data, rd_line_data;
  logic [63:0][511:0] row_data;
  int cyc = 0;
  always @(posedge clk) cyc++;

  nvm_data_array #(.ROW_BITS(RB)) dut (.clk, .rst_n, .busy, .rd_line_en, .rd_row_en, .wr_en,
    .row, .slot, .rd_id, .wr_data, .rd_line_valid, .rd_line_id, .rd_line_data, .row_valid, .row_data);

  function automatic logic [511:0] pat(input int r, input int s);
    return {16{32'(r * 1000 + s * 7 + 1)}};
  endfunction

  task automatic chk(input string what, input logic [511:0] got, input logic [511:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got[31:0], exp[31:0]); end
  endtask

  task automatic wait_idle(output int waited);
    waited = 0;
    while (busy) begin @(negedge clk); waited++; end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w, t0, t1, got1, got2;
    rd_line_en = 0; rd_row_en = 0; wr_en = 0; row = 0; slot = 0; rd_id = 0; wr_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // write row 2 slots 0, 5, 40, 63 and row 6 slot 5
    for (int k = 0; k < 5; k++) begin
      int r, s;
      r = (k == 4) ? 6 : 2; s = (k == 0) ? 0 : (k == 1) ? 5 : (k == 2) ? 40 : (k == 3) ? 63 : 5;
      wait_idle(w);
      if (k > 0) chk("write busy", 32'(w), 32'(25 - 1));
      @(negedge clk);
      wr_en = 0;
      row = RB'(r); slot = 6'(s); wr_data = pat(r, s); wr_en = 1;
      @(negedge clk); wr_en = 0;
    end
    wait_idle(w);
    // two line reads, back to back as fast as the array allows
    @(negedge clk);
    row = 2; slot = 40; rd_id = 8'hA1; rd_line_en = 1; t0 = cyc;
    @(negedge clk); rd_line_en = 0;
    wait_idle(w);
    chk("read busy", 32'(w), 32'(10 - 1));
    row = 6; slot = 5; rd_id = 8'hB2; rd_line_en = 1; t1 = cyc;
    @(negedge clk); rd_line_en = 0;
    got1 = 0; got2 = 0;
    repeat (40) begin
      @(posedge clk); #1;
      if (rd_line_valid && rd_line_id == 8'hA1) begin
        got1++; chk("lat1", 32'(cyc - t0), 32'd22); chk("data1", rd_line_data, pat(2, 40));
      end
      if (rd_line_valid && rd_line_id == 8'hB2) begin
        got2++; chk("lat2", 32'(cyc - t1), 32'd22); chk("data2", rd_line_data, pat(6, 5));
      end
    end
    chk("one resp each", 32'(got1 * 10 + got2), 32'd11);
    // row read
    wait_idle(w);
    @(negedge clk); row = 2; rd_row_en = 1; t0 = cyc;
    @(negedge clk); rd_row_en = 0;
    while (!row_valid) @(negedge clk);
    chk("row lat", 32'(cyc - t0), 32'd22);
    chk("row s0", row_data[0], pat(2, 0));
    chk("row s5", row_data[5], pat(2, 5));
    chk("row s40", row_data[40], pat(2, 40));
    chk("row s63", row_data[63], pat(2, 63));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
