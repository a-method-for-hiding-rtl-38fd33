// tb_page_buffer_data: fills page buffers with masked region writes and
// single-line writes and reads every touched slot back (1-cycle read),
// comparing with a reference copy; also checks that masked-off slots keep
// their old contents.
module tb_page_buffer_data;
  import cloak_pkg::*;
  localparam int NPB = 20;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rd_en, wr_line_en, wr_region_en;
  logic [4:0] rd_pb, wr_line_pb, wr_region_pb, rd_slot, wr_line_slot;
  logic [511:0] rd_data, wr_line_data;
  logic [31:0] wr_mask;
  logic [31:0][511:0] wr_region_data;
  logic [511:0] ref_mem [NPB][32];

  page_buffer_data #(.NUM_PB(NPB)) dut (.clk, .rd_en, .rd_pb, .rd_slot, .rd_data,
    .wr_line_en, .wr_line_pb, .wr_line_slot, .wr_line_data,
    .wr_region_en, .wr_region_pb, .wr_mask, .wr_region_data);

  function automatic logic [511:0] pat(input int a, input int b, input int c);
    return {16{32'(a * 100000 + b * 100 + c)}};
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_line_en = 0; wr_region_en = 0; rd_pb = 0; rd_slot = 0;
    wr_line_pb = 0; wr_line_slot = 0; wr_line_data = 0; wr_region_pb = 0; wr_mask = 0;
    wr_region_data = '0;
    // initialise every slot with a full-mask region write
    for (int p = 0; p < NPB; p++) begin
      @(negedge clk);
      wr_region_en = 1; wr_region_pb = 5'(p); wr_mask = '1;
      for (int s = 0; s < 32; s++) begin wr_region_data[s] = pat(1, p, s); ref_mem[p][s] = pat(1, p, s); end
    end
    // partial region writes (promotion step 2 style)
    for (int k = 0; k < 10; k++) begin
      int p; logic [31:0] m;
      p = $urandom_range(NPB - 1); m = $urandom;
      @(negedge clk);
      wr_region_en = 1; wr_region_pb = 5'(p); wr_mask = m;
      for (int s = 0; s < 32; s++) begin
        wr_region_data[s] = pat(2 + k, p, s);
        if (m[s]) ref_mem[p][s] = pat(2 + k, p, s);
      end
    end
    @(negedge clk); wr_region_en = 0;
    // line writes to other PBs
    for (int k = 0; k < 30; k++) begin
      int p, s;
      p = $urandom_range(NPB - 1); s = $urandom_range(31);
      @(negedge clk);
      wr_line_en = 1; wr_line_pb = 5'(p); wr_line_slot = 5'(s); wr_line_data = pat(50 + k, p, s);
      ref_mem[p][s] = pat(50 + k, p, s);
    end
    @(negedge clk); wr_line_en = 0;
    // read everything back
    for (int p = 0; p < NPB; p++)
      for (int s = 0; s < 32; s++) begin
        @(negedge clk); rd_en = 1; rd_pb = 5'(p); rd_slot = 5'(s);
        @(negedge clk); rd_en = 0;
        checks++;
        if (rd_data !== ref_mem[p][s]) begin
          failures++;
          if (failures < 10) $display("FAIL pb %0d slot %0d: %0h vs %0h", p, s, rd_data[31:0], ref_mem[p][s][31:0]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
