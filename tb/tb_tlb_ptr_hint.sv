// tb_tlb_ptr_hint: checks the PTR trigger of the L1 TLB side: fills with
// and without L2-TLB hit / Accessed / Dirty, the 6-cycle PTR latency, huge
// page chunk tracking (2MB and 1GB) on later L1 TLB hits, a PTR waiting
// for the network and the drop of a waiting PTR overtaken by a newer one.
module tb_tlb_ptr_hint;
  import cloak_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic fill_valid, fill_l2, fill_a, fill_d, hit_valid, ptr_valid, ptr_ready, ptr_dropped, chunk_ptr;
  logic [5:0] fill_entry, hit_entry;
  page_size_e fill_size;
  logic [47:0] fill_pa, hit_pa, ptr_pa;

  tlb_ptr_hint dut (.clk, .rst_n, .fill_valid, .fill_entry, .fill_size, .fill_l2tlb_hit(fill_l2),
    .fill_accessed(fill_a), .fill_dirty(fill_d), .fill_pa, .hit_valid, .hit_entry, .hit_pa,
    .ptr_valid, .ptr_pa, .ptr_ready, .ptr_dropped, .chunk_ptr);

  // record every PTR leaving
  logic [47:0] seen_pa [$];
  int          seen_cyc [$];
  always @(posedge clk) if (rst_n && ptr_valid && ptr_ready) begin
    seen_pa.push_back(ptr_pa); seen_cyc.push_back(cyc);
  end

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  task automatic fill(input int e, input page_size_e sz, input logic l2, a, d, input logic [47:0] pa);
    @(negedge clk);
    fill_valid = 1; fill_entry = 6'(e); fill_size = sz; fill_l2 = l2; fill_a = a; fill_d = d; fill_pa = pa;
    @(negedge clk); fill_valid = 0;
  endtask

  task automatic hit(input int e, input logic [47:0] pa);
    @(negedge clk);
    hit_valid = 1; hit_entry = 6'(e); hit_pa = pa;
    @(negedge clk); hit_valid = 0;
  endtask

  // expect exactly the given PTR, 6 cycles after the event
  task automatic expect_ptr(input string what, input logic [47:0] pa, input int n_exp);
    repeat (10) @(negedge clk);
    chk({what, " count"}, seen_pa.size(), n_exp);
    if (n_exp == 1 && seen_pa.size() == 1) chk({what, " pa"}, seen_pa[0], pa);
    seen_pa.delete(); seen_cyc.delete();
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    fill_valid = 0; hit_valid = 0; fill_entry = 0; hit_entry = 0; fill_size = PG_4K;
    fill_l2 = 0; fill_a = 0; fill_d = 0; fill_pa = 0; hit_pa = 0; ptr_ready = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    // first touch of a page: nothing referenced it before -> no PTR
    fill(3, PG_4K, 0, 0, 0, 48'h0000_1234_5040);
    expect_ptr("cold fill", 0, 0);
    fill(3, PG_4K, 1, 0, 0, 48'h0000_1234_5040);  expect_ptr("l2tlb hit", 48'h0000_1234_5040, 1);
    fill(4, PG_4K, 0, 1, 0, 48'h0000_2234_5080);  expect_ptr("accessed",  48'h0000_2234_5080, 1);
    fill(5, PG_4K, 0, 0, 1, 48'h0000_3234_50C0);  expect_ptr("dirty",     48'h0000_3234_50C0, 1);
    // latency: the event is in the cycle after this negedge
    @(negedge clk);
    fill_valid = 1; fill_entry = 6; fill_size = PG_4K; fill_l2 = 1; fill_a = 0; fill_d = 0;
    fill_pa = 48'h0000_4000_0000; t0 = cyc;
    @(negedge clk); fill_valid = 0;
    repeat (10) @(negedge clk);
    chk("latency", seen_cyc.size() == 1 ? seen_cyc[0] - t0 : -1, 6 + 1);
    seen_pa.delete(); seen_cyc.delete();
    // 4KB hit never triggers
    hit(5, 48'h0000_3234_5100); expect_ptr("4k hit", 0, 0);
    // 2MB page: fill in chunk 0x12, hit same chunk, hit chunk 0x13, hit it again
    fill(10, PG_2M, 1, 0, 0, 48'h0000_8001_2040); expect_ptr("2M fill", 48'h0000_8001_2040, 1);
    hit(10, 48'h0000_8001_2FC0);                  expect_ptr("2M same chunk", 0, 0);
    hit(10, 48'h0000_8001_3000);                  expect_ptr("2M new chunk", 48'h0000_8001_3000, 1);
    hit(10, 48'h0000_8001_3040);                  expect_ptr("2M chunk recorded", 0, 0);
    hit(10, 48'h0000_8001_2000);                  expect_ptr("2M back", 48'h0000_8001_2000, 1);
    // 1GB page: chunk bits 29:12
    fill(11, PG_1G, 0, 1, 0, 48'h0040_0000_1000); expect_ptr("1G fill", 48'h0040_0000_1000, 1);
    hit(11, 48'h0040_2000_1000);                  expect_ptr("1G far chunk", 48'h0040_2000_1000, 1);
    hit(11, 48'h0040_2000_1FFF);                  expect_ptr("1G same chunk", 0, 0);
    // refilling the entry with a 4KB page stops chunk PTRs
    fill(11, PG_4K, 0, 0, 0, 48'h0000_0000_9000); expect_ptr("4k refill", 0, 0);
    hit(11, 48'h0000_0000_9040);                  expect_ptr("4k refill hit", 0, 0);
    // not ready: the PTR waits; a newer one replaces it (one drop)
    ptr_ready = 0;
    fill(12, PG_4K, 1, 0, 0, 48'h0000_0000_A000);
    begin
      int drops; drops = 0;
      repeat (10) begin @(posedge clk); #1; if (ptr_dropped) drops++; end
      chk("waiting, not dropped", drops, 0);
      chk("waiting PTR valid", ptr_valid, 1);
      chk("waiting PTR address", ptr_pa, 48'h0000_0000_A000);
      fill(13, PG_4K, 1, 0, 0, 48'h0000_0000_B000);
      repeat (10) begin @(posedge clk); #1; if (ptr_dropped) drops++; end
      chk("older PTR dropped", drops, 1);
    end
    expect_ptr("nothing taken while not ready", 0, 0);
    @(negedge clk); ptr_ready = 1;
    expect_ptr("newer PTR delivered when ready", 48'h0000_0000_B000, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
