// tb_cloak_addr_decode: checks the Cloak address split for the 16MB slice
// (row bits 23:12) and for the 32MB worked example (row bits 24:12,
// Tag-High 47:25, Tag-Low 11:8, set 7:6, offset 5:0), on random addresses.
// Expected fields are computed with shifts and masks, not with slices.
module tb_cloak_addr_decode;
  import cloak_pkg::*;
  int checks = 0, failures = 0;

  logic [47:0] addr;
  logic [23:0] th12;  logic [11:0] row12;
  logic [22:0] th13;  logic [12:0] row13;
  logic [3:0]  tl12, tl13;
  logic [1:0]  set12, set13;
  logic [5:0]  off12, off13;
  logic [35:0] ppn12, ppn13;
  logic        half12, half13, reg12, reg13;

  cloak_addr_decode #(.ROW_BITS(12)) dut12 (.addr, .tag_high(th12), .row(row12), .tag_low(tl12),
    .set_idx(set12), .offset(off12), .ppn(ppn12), .page_half(half12), .region(reg12));
  cloak_addr_decode #(.ROW_BITS(13)) dut13 (.addr, .tag_high(th13), .row(row13), .tag_low(tl13),
    .set_idx(set13), .offset(off13), .ppn(ppn13), .page_half(half13), .region(reg13));

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h (addr %h)", what, got, exp, addr);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      longint unsigned a;
      a = {$urandom, $urandom} & 64'hFFFF_FFFF_FFFF;
      addr = a[47:0];
      #1;
      chk("th12",  th12,  a >> 24);
      chk("row12", row12, (a >> 12) & 64'hFFF);
      chk("th13",  th13,  a >> 25);
      chk("row13", row13, (a >> 12) & 64'h1FFF);
      chk("tl",    tl12,  (a >> 8) & 64'hF);
      chk("tl13",  tl13,  (a >> 8) & 64'hF);
      chk("set",   set12, (a >> 6) & 64'h3);
      chk("off",   off12, a & 64'h3F);
      chk("ppn",   ppn12, a >> 12);
      chk("half",  half12, (a >> 11) & 1);
      chk("region", reg12, (a >> 7) & 1);
      // tag bits of a CLR in the 32MB example: 23 + 4 = 27
      chk("tagbits", $bits(th13) + $bits(tl13), 27);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
