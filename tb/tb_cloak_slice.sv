// tb_cloak_slice: end-to-end test of one Cloak LLC slice (16 rows, 4 PBs).
// L2 victims of several pages are written, then PTRs promote pages into
// page buffers. Checked against a reference copy of the written data:
// read data and source (PB or NVM), the NVM and PB hit latencies, misses
// forwarded to memory, the conflict rule of promotion, a PB hit answered
// while an NVM read is in flight, PB write-through, invalidation,
// eviction, and the PTR outcomes (already present, below threshold, no PB
// free, replacement of an expired PB).
module tb_cloak_slice;
  import cloak_pkg::*;
  localparam int RB = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic ready, clr_valid, clr_ready, ptr_valid, ptr_ready, resp_valid, resp_ready, mem_valid, mem_ready;
  clr_req_t clr_req; ptr_req_t ptr_req; clr_resp_t resp; mem_req_t mem_req;
  slice_events_t ev;
  logic [6:0] thr; logic [9:0] ap;

  cloak_slice #(.ROW_BITS(RB), .NUM_PB(4)) dut (.clk, .rst_n, .ready, .cfg_threshold(thr),
    .cfg_activation_period(ap), .clr_valid, .clr_req, .clr_ready, .ptr_valid, .ptr_req, .ptr_ready,
    .resp_valid, .resp, .resp_ready, .mem_valid, .mem_req, .mem_ready, .events(ev));

  // ---------------- event counters ----------------
  int n_ev [15];
  always @(posedge clk) if (rst_n) begin
    logic [14:0] b; b = ev;
    for (int i = 0; i < 15; i++) if (b[i]) n_ev[14 - i]++;
  end
  // index order follows the struct declaration
  localparam int E_MISS = 0, E_NVM = 1, E_PB = 2, E_PAR = 3, E_STALL = 4, E_PBW = 5, E_RDEC = 6,
                 E_EVICT = 7, E_PTR = 8, E_PRES = 9, E_BELOW = 10, E_NOPB = 11, E_PROM = 12,
                 E_CONF = 13, E_REPL = 14;

  // ---------------- response capture -------------
  clr_resp_t rq [$]; int rq_cyc [$];
  always @(posedge clk) if (rst_n && resp_valid && resp_ready) begin rq.push_back(resp); rq_cyc.push_back(cyc); end
  mem_req_t mq [$];
  always @(posedge clk) if (rst_n && mem_valid && mem_ready) mq.push_back(mem_req);

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d (%0h) expected %0d (%0h)", what, got, got, exp, exp); end
  endtask

  function automatic logic [47:0] la(input int page, input int set, input int tl);
    // page number: Tag-High = page, row 5
    return {24'(page), 4'(5), 12'({4'(tl), 2'(set), 6'd0})} ;
  endfunction
  function automatic logic [511:0] dat(input logic [47:0] a, input int ver);
    return {16{a[31:0] ^ 32'(ver * 32'h01010101)}};
  endfunction

  int accept_cyc;
  task automatic send(input clr_op_e op, input logic [47:0] a, input logic [511:0] d);
    @(negedge clk);
    clr_valid = 1; clr_req.op = op; clr_req.core = 2'd1; clr_req.addr = a; clr_req.data = d;
    @(posedge clk);
    while (!clr_ready) @(posedge clk);
    accept_cyc = cyc;
    @(negedge clk); clr_valid = 0;
  endtask
  task automatic ptr(input logic [47:0] a);
    @(negedge clk);
    ptr_valid = 1; ptr_req.core = 2'd2; ptr_req.addr = a;
    @(posedge clk);
    while (!ptr_ready) @(posedge clk);
    @(negedge clk); ptr_valid = 0;
  endtask
  task automatic settle(input int n); repeat (n) @(negedge clk); endtask

  // read and check data, source and latency (lat < 0: do not check)
  task automatic rd(input string what, input logic [47:0] a, input logic [511:0] d,
                    input resp_src_e src, input int lat);
    int t0, n;
    rq.delete(); rq_cyc.delete();
    send(OP_READ, a, '0);
    t0 = accept_cyc; n = 0;
    while (rq.size() == 0 && n < 100) begin @(negedge clk); n++; end
    chk({what, " resp"}, rq.size(), 1);
    if (rq.size() == 1) begin
      chk({what, " data"}, rq[0].data[63:0], d[63:0]);
      chk({what, " addr"}, rq[0].addr, a);
      chk({what, " src"}, rq[0].src, src);
      if (lat >= 0) chk({what, " latency"}, rq_cyc[0] - t0, lat);
    end
  endtask

  localparam int LAT_PB = 6, LAT_NVM = 28;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr_valid = 0; ptr_valid = 0; clr_req = '0; ptr_req = '0; resp_ready = 1; mem_ready = 1;
    thr = 6; ap = 20;
    for (int i = 0; i < 15; i++) n_ev[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (!ready) @(negedge clk);

    // ---- page 0x11: 7 lines. set 0 (region 0): tl 0,1,9; set 2 (region 1): tl 8,2; set 3: tl 3, 4
    // set 0 way 0 (tl 0, page half 0) and set 2 way 0 (tl 8, half 1) share PB slot 0
    send(OP_WRITE, la('h11, 0, 0), dat(la('h11, 0, 0), 0));
    send(OP_WRITE, la('h11, 0, 1), dat(la('h11, 0, 1), 0));
    send(OP_WRITE, la('h11, 0, 9), dat(la('h11, 0, 9), 0));
    send(OP_WRITE, la('h11, 2, 8), dat(la('h11, 2, 8), 0));
    send(OP_WRITE, la('h11, 2, 2), dat(la('h11, 2, 2), 0));
    send(OP_WRITE, la('h11, 3, 3), dat(la('h11, 3, 3), 0));
    send(OP_WRITE, la('h11, 3, 4), dat(la('h11, 3, 4), 0));
    // ---- page 0x22 (same row): 3 lines only
    send(OP_WRITE, la('h22, 1, 0), dat(la('h22, 1, 0), 0));
    send(OP_WRITE, la('h22, 1, 1), dat(la('h22, 1, 1), 0));
    send(OP_WRITE, la('h22, 3, 5), dat(la('h22, 3, 5), 0));
    settle(300);

    // NVM read, miss
    rd("nvm read", la('h11, 3, 3), dat(la('h11, 3, 3), 0), SRC_NVM, LAT_NVM);
    mq.delete();
    send(OP_READ, la('h33, 0, 0), '0);
    settle(10);
    chk("miss to memory", mq.size(), 1);
    if (mq.size() == 1) chk("miss addr", mq[0].addr, la('h33, 0, 0));

    // PTR for page 0x22: below threshold
    ptr(la('h22, 1, 0)); settle(10);
    chk("below threshold", n_ev[E_BELOW], 1);
    // PTR for page 0x11 from the lower half (bit 11 = 0): region-0 line keeps slot 0
    ptr(la('h11, 1, 0));
    settle(60);
    chk("promoted", n_ev[E_PROM], 1);
    chk("conflict seen", n_ev[E_CONF], 1);
    // PB slots 0..2 and 16, 17 are filled: residency 5
    chk("residency at load", int'(dut.u_pbt.st_residency[0]), 5);
    chk("replacement at load", int'(dut.u_pbt.st_replacement[0]) > 5 * 20 - 60, 1);
    // invalidate a PB line (set 2 way 1 -> PB slot 1, region 1): residency 4
    send(OP_INV, la('h11, 2, 2), '0);
    settle(5);
    chk("inv residency", int'(dut.u_pbt.st_residency[0]), 4);
    chk("inv event", n_ev[E_RDEC], 1);
    mq.delete();
    send(OP_READ, la('h11, 2, 2), '0);
    settle(10);
    chk("inv -> miss", mq.size(), 1);
    // PB hits for the promoted lines
    rd("pb tl0",  la('h11, 0, 0), dat(la('h11, 0, 0), 0), SRC_PB, LAT_PB);
    rd("pb tl9",  la('h11, 0, 9), dat(la('h11, 0, 9), 0), SRC_PB, LAT_PB);
    chk("pb reads lower residency", int'(dut.u_pbt.st_residency[0]), 2);
    rd("pb tl4",  la('h11, 3, 4), dat(la('h11, 3, 4), 0), SRC_PB, LAT_PB);
    // the conflict loser (set 2 way 0, upper page half) comes from the NVM array
    rd("loser", la('h11, 2, 8), dat(la('h11, 2, 8), 0), SRC_NVM, LAT_NVM);
    // the other page in the row is not in a PB
    rd("other page", la('h22, 1, 1), dat(la('h22, 1, 1), 0), SRC_NVM, -1);
    // PTR again: already present
    ptr(la('h11, 0, 0)); settle(10);
    chk("present", n_ev[E_PRES], 1);

    // a PB hit overtakes an older NVM read
    rq.delete(); rq_cyc.delete();
    send(OP_READ, la('h22, 3, 5), '0);
    send(OP_READ, la('h11, 3, 3), '0);
    settle(40);
    chk("two responses", rq.size(), 2);
    if (rq.size() == 2) begin
      chk("pb first", rq[0].src, SRC_PB);
      chk("pb first addr", rq[0].addr, la('h11, 3, 3));
      chk("nvm second data", rq[1].data[63:0], dat(la('h22, 3, 5), 0));
    end
    chk("parallel event", n_ev[E_PAR] >= 1, 1);

    // write-through into the PB
    send(OP_WRITE, la('h11, 0, 9), dat(la('h11, 0, 9), 7));
    settle(30);
    chk("pb write event", n_ev[E_PBW], 1);
    rd("pb after write", la('h11, 0, 9), dat(la('h11, 0, 9), 7), SRC_PB, LAT_PB);

    // eviction: fill set 3 of row 5 with 16 lines of page 0x44
    for (int t = 0; t < 16; t++) send(OP_WRITE, la('h44, 3, t), dat(la('h44, 3, t), 1));
    settle(30);
    chk("evictions", n_ev[E_EVICT] >= 2, 1);

    // five more pages of 6 lines each in rows of their own, PB pressure
    for (int p = 0; p < 5; p++) begin
      for (int t = 0; t < 6; t++) begin
        logic [47:0] a;
        a = {24'(16'h100 + p), 4'(p + 8), 12'({4'(t), 2'(t % 4), 6'd0})};
        send(OP_WRITE, a, dat(a, 2));
      end
    end
    settle(300);
    ap = 1000;   // long activation period: PBs stay busy
    for (int p = 0; p < 5; p++) begin
      ptr({24'(16'h100 + p), 4'(p + 8), 12'h000});
      settle(50);
    end
    chk("no free PB", n_ev[E_NOPB] >= 1, 1);
    chk("replacement of expired PB", n_ev[E_REPL] >= 1, 1);
    // a line of the last promoted page is served from its PB
    begin
      logic [47:0] a;
      a = {24'(16'h103), 4'(11), 12'({4'(2), 2'(2), 6'd0})};
      rd("late promote", a, dat(a, 2), SRC_PB, LAT_PB);
    end
    chk("stall seen", n_ev[E_STALL] >= 1, 1);
    $display("events: miss %0d nvm %0d pb %0d par %0d stall %0d pbw %0d rdec %0d evict %0d ptr %0d pres %0d below %0d nopb %0d prom %0d conf %0d repl %0d",
      n_ev[0], n_ev[1], n_ev[2], n_ev[3], n_ev[4], n_ev[5], n_ev[6], n_ev[7], n_ev[8], n_ev[9], n_ev[10], n_ev[11], n_ev[12], n_ev[13], n_ev[14]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
