// tb_cloak_top: end-to-end test of the four-core Cloak LLC (four slices of
// 16 rows with 4 page buffers each, so that it runs quickly). Cores write
// L2 victims of their pages, L1 TLB fills send PTRs that promote pages
// into page buffers, and the cores then read: every response is checked
// against a reference copy (data, address, receiving core), every read
// must be answered exactly once, to the core that issued it, and every
// mechanism of the design is counted and must occur at least once: NVM
// hit, PB hit, miss to memory, promotion, promotion conflict, PTR for a
// page already in a PB, PTR below threshold, no free PB, replacement of an
// expired PB, PB write-through, residency decrement, LLC eviction, a PB
// hit overtaking an NVM read, stall on the non-pipelined array, a huge
// page chunk PTR and a cold TLB fill that sends no PTR.
module tb_cloak_top;
  import cloak_pkg::*;
  localparam int RB = 4, NC = 4, NS = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ready;
  logic [6:0] thr; logic [9:0] ap;
  logic [NC-1:0] clr_valid, clr_ready, resp_valid, resp_ready;
  clr_req_t clr_req [NC]; clr_resp_t resp [NC];
  logic [NC-1:0] f_valid, f_l2, f_a, f_d, h_valid, ptr_dropped;
  logic [5:0] f_entry [NC], h_entry [NC];
  page_size_e f_size [NC];
  logic [47:0] f_pa [NC], h_pa [NC];
  logic [NS-1:0] mem_valid, mem_ready;
  mem_req_t mem_req [NS];
  slice_events_t ev [NS];

  cloak_top #(.ROW_BITS(RB), .NUM_PB(4)) dut (.clk, .rst_n, .ready, .cfg_threshold(thr),
    .cfg_activation_period(ap), .clr_valid, .clr_req, .clr_ready, .resp_valid, .resp, .resp_ready,
    .tlb_fill_valid(f_valid), .tlb_fill_entry(f_entry), .tlb_fill_size(f_size),
    .tlb_fill_l2tlb_hit(f_l2), .tlb_fill_accessed(f_a), .tlb_fill_dirty(f_d), .tlb_fill_pa(f_pa),
    .tlb_hit_valid(h_valid), .tlb_hit_entry(h_entry), .tlb_hit_pa(h_pa), .ptr_dropped,
    .mem_valid, .mem_req, .mem_ready, .events(ev));

  // ---------------- mechanism counters ----------------
  int n_ev [15];
  int n_ptr_sent, n_chunk, n_resp, n_mem, n_drop;
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) begin
      logic [14:0] b; b = ev[s];
      for (int i = 0; i < 15; i++) if (b[i]) n_ev[14 - i]++;
    end
    for (int c = 0; c < NC; c++) begin
      if (dut.hint_valid[c]) n_ptr_sent++;
      if (dut.chunk_ptr[c]) n_chunk++;
      if (ptr_dropped[c]) n_drop++;
    end
    for (int s = 0; s < NS; s++) if (mem_valid[s] && mem_ready[s]) n_mem++;
  end
  localparam int E_MISS = 0, E_NVM = 1, E_PB = 2, E_PAR = 3, E_STALL = 4, E_PBW = 5, E_RDEC = 6,
                 E_EVICT = 7, E_PTR = 8, E_PRES = 9, E_BELOW = 10, E_NOPB = 11, E_PROM = 12,
                 E_CONF = 13, E_REPL = 14;

  // ---------------- reference data and response check ----------------
  logic [511:0] ref_data [logic [47:0]];
  int pb_resps;
  // reads each core still waits for (answered by a response or by memory)
  int pending [NC][logic [47:0]];
  function automatic void retire(input int c, input logic [47:0] a, input string how);
    checks++;
    if (pending[c].exists(a) && pending[c][a] > 0) pending[c][a]--;
    else begin failures++; $display("FAIL %s for core %0d addr %h not requested", how, c, a); end
  endfunction
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) if (resp_valid[c] && resp_ready[c]) begin
      n_resp++;
      checks++;
      if (resp[c].core != CORE_W'(c) || !ref_data.exists(resp[c].addr)
          || resp[c].data != ref_data[resp[c].addr]) begin
        failures++;
        $display("FAIL response to core %0d addr %h", c, resp[c].addr);
      end
      if (resp[c].src == SRC_PB) pb_resps++;
      retire(c, resp[c].addr, "response");
    end
    for (int s = 0; s < NS; s++) if (mem_valid[s] && mem_ready[s])
      retire(int'(mem_req[s].core), mem_req[s].addr, "memory request");
  end

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // address: page number p, slice s, row r; line with Tag-Low tl in set st
  function automatic logic [47:0] A(input int p, input int s, input int r, input int tl, input int st);
    return {30'(p), 2'(s), 4'(r), 4'(tl), 2'(st), 6'd0};
  endfunction
  function automatic logic [511:0] D(input logic [47:0] a, input int v);
    return {16{a[31:0] + 32'(v)}};
  endfunction

  task automatic clr(input int c, input clr_op_e op, input logic [47:0] a, input logic [511:0] d);
    @(negedge clk);
    clr_valid[c] = 1; clr_req[c].op = op; clr_req[c].addr = a; clr_req[c].data = d; clr_req[c].core = '0;
    if (op == OP_WRITE) ref_data[a] = d;
    if (op == OP_INV) ref_data.delete(a);
    if (op == OP_READ) pending[c][a] = pending[c].exists(a) ? pending[c][a] + 1 : 1;
    @(posedge clk);
    while (!clr_ready[c]) @(posedge clk);
    @(negedge clk); clr_valid[c] = 0;
  endtask
  task automatic fill(input int c, input int e, input page_size_e sz, input logic l2, input logic [47:0] pa);
    @(negedge clk);
    f_valid[c] = 1; f_entry[c] = 6'(e); f_size[c] = sz; f_l2[c] = l2; f_a[c] = 0; f_d[c] = 0; f_pa[c] = pa;
    @(negedge clk); f_valid[c] = 0;
  endtask
  task automatic hit(input int c, input int e, input logic [47:0] pa);
    @(negedge clk);
    h_valid[c] = 1; h_entry[c] = 6'(e); h_pa[c] = pa;
    @(negedge clk); h_valid[c] = 0;
  endtask
  task automatic settle(input int n); repeat (n) @(negedge clk); endtask

  // write a page's lines: sets 0 and 2 share PB slots (conflicts)
  task automatic write_page(input int c, input int p, input int s, input int r, input int n);
    for (int i = 0; i < n; i++) clr(c, OP_WRITE, A(p, s, r, i, (i % 2) * 2), D(A(p, s, r, i, (i % 2) * 2), p));
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prom0;
    thr = 6; ap = 20;
    clr_valid = 0; resp_ready = '1; f_valid = 0; h_valid = 0; mem_ready = '1;
    f_l2 = 0; f_a = 0; f_d = 0;
    for (int c = 0; c < NC; c++) begin
      clr_req[c] = '0; f_entry[c] = 0; h_entry[c] = 0; f_size[c] = PG_4K; f_pa[c] = 0; h_pa[c] = 0;
    end
    for (int i = 0; i < 15; i++) n_ev[i] = 0;
    n_ptr_sent = 0; n_drop = 0; n_chunk = 0; n_resp = 0; n_mem = 0; pb_resps = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (!ready) @(negedge clk);

    // every core writes a page of 8 lines into "its" slice, in parallel
    fork
      write_page(0, 'h10, 0, 3, 8);
      write_page(1, 'h11, 1, 3, 8);
      write_page(2, 'h12, 2, 3, 8);
      write_page(3, 'h13, 3, 3, 8);
    join
    // and a small page (3 lines) in slice 0
    write_page(0, 'h20, 0, 3, 3);
    settle(300);
    // reads before promotion: NVM
    clr(1, OP_READ, A('h10, 0, 3, 2, 0), '0);
    settle(40);
    chk("nvm hit", n_ev[E_NVM], 1);
    // cold fill: no PTR
    fill(0, 1, PG_4K, 0, A('h10, 0, 3, 0, 0));
    settle(20);
    chk("cold fill sends nothing", n_ptr_sent, 0);
    // refills of each core's page: PTRs (lower page half)
    for (int c = 0; c < NC; c++) fill(c, 2, PG_4K, 1, A('h10 + c, c, 3, 0, 0));
    settle(80);
    chk("four promotions", n_ev[E_PROM], 4);
    chk("conflicts", n_ev[E_CONF] >= 1, 1);
    // all cores read their own pages at once, and one read of another core's page
    fork
      for (int i = 0; i < 8; i++) clr(0, OP_READ, A('h10, 0, 3, i, (i % 2) * 2), '0);
      for (int i = 0; i < 8; i++) clr(1, OP_READ, A('h11, 1, 3, i, (i % 2) * 2), '0);
      for (int i = 0; i < 8; i++) clr(2, OP_READ, A('h12, 2, 3, i, (i % 2) * 2), '0);
      for (int i = 0; i < 8; i++) clr(3, OP_READ, A('h13, 3, 3, i, (i % 2) * 2), '0);
    join
    settle(300);
    chk("pb hits", pb_resps >= 4 * 4, 1);
    // PTR for a page already present; PTR for the small page
    fill(2, 3, PG_4K, 1, A('h12, 2, 3, 5, 2));
    fill(0, 4, PG_4K, 1, A('h20, 0, 3, 1, 0));
    settle(40);
    chk("present", n_ev[E_PRES], 1);
    chk("below threshold", n_ev[E_BELOW], 1);
    // miss to memory
    clr(3, OP_READ, A('h99, 1, 7, 0, 0), '0);
    settle(20);
    chk("miss", n_mem, 1);
    // write-through and invalidate of PB-resident lines of page 0x13
    // (reads above emptied residency; the write brings it back)
    clr(3, OP_WRITE, A('h13, 3, 3, 7, 2), D(A('h13, 3, 3, 7, 2), 77));
    clr(3, OP_INV,   A('h13, 3, 3, 7, 2), '0);
    settle(60);
    chk("pb write", n_ev[E_PBW] >= 1, 1);
    chk("residency dec", n_ev[E_RDEC] >= 1, 1);
    // an NVM read followed by a PB hit in the same slice (page 0x11 again)
    fill(1, 5, PG_4K, 1, A('h11, 1, 3, 0, 0));   // re-promote (PB expired)
    clr(1, OP_WRITE, A('h31, 1, 3, 0, 1), D(A('h31, 1, 3, 0, 1), 5));
    settle(100);
    clr(1, OP_READ, A('h31, 1, 3, 0, 1), '0);
    clr(1, OP_READ, A('h11, 1, 3, 4, 0), '0);
    settle(60);
    chk("pb hit during nvm read", n_ev[E_PAR] >= 1, 1);
    // huge page: 2MB entry on core 2; a hit in another 4KB chunk sends a PTR
    write_page(2, 'h50, 2, 9, 7);
    prom0 = n_ev[E_PROM];
    settle(300);
    fill(2, 9, PG_2M, 1, A('h50, 2, 8, 0, 0));
    settle(30);
    hit(2, 9, A('h50, 2, 9, 3, 0));
    settle(80);
    chk("chunk ptr", n_chunk, 1);
    chk("chunk promoted", n_ev[E_PROM], prom0 + 1);
    // PB pressure in slice 3: five pages, long activation period
    ap = 1000;
    for (int p = 0; p < 5; p++) write_page(3, 'h60 + p, 3, 10 + p, 6);
    settle(300);
    for (int p = 0; p < 5; p++) begin fill(3, 10 + p, PG_4K, 1, A('h60 + p, 3, 10 + p, 0, 0)); settle(60); end
    chk("no free PB", n_ev[E_NOPB] >= 1, 1);
    chk("expired PB replaced", n_ev[E_REPL] >= 1, 1);
    // eviction: 17 lines into one set of slice 0 row 3
    for (int i = 0; i < 17; i++) clr(0, OP_WRITE, A('h70 + i, 0, 3, 0, 2), D(A('h70 + i, 0, 3, 0, 2), 1));
    settle(100);
    chk("eviction", n_ev[E_EVICT] >= 1, 1);
    chk("stall", n_ev[E_STALL] >= 1, 1);
    chk("nvm hits", n_ev[E_NVM] >= 2, 1);
    chk("pb hit events", n_ev[E_PB] >= 16, 1);
    chk("miss events", n_ev[E_MISS], n_mem);
    chk("no PTR dropped", n_drop, 0);
    // every read was answered, to the core that asked
    for (int c = 0; c < NC; c++) begin
      int left = 0;
      foreach (pending[c][a]) left += pending[c][a];
      chk("unanswered reads", left, 0);
    end
    // every mechanism must have happened at least once
    for (int i = 0; i < 15; i++) begin
      checks++;
      if (n_ev[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
    end
    chk("chunk ptr happened", n_chunk > 0, 1);
    $display("mechanisms: miss %0d nvm %0d pb %0d par %0d stall %0d pbw %0d rdec %0d evict %0d ptr %0d pres %0d below %0d nopb %0d prom %0d conf %0d repl %0d chunk %0d responses %0d",
      n_ev[0], n_ev[1], n_ev[2], n_ev[3], n_ev[4], n_ev[5], n_ev[6], n_ev[7], n_ev[8], n_ev[9], n_ev[10],
      n_ev[11], n_ev[12], n_ev[13], n_ev[14], n_chunk, n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
