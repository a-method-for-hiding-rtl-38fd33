// tb_cloak_top_full: the four-core Cloak LLC at its full evaluated size
// (four 16MB slices of 4096 rows, 20 page buffers per slice, threshold 6,
// Activation Period 20), built with the top module's default parameters.
// After the tag arrays finish their reset sweep, every core writes a page
// of 10 lines into a different slice, refills its L1 TLB entry (an L2 TLB
// hit, so a PTR is sent), and reads the page back. Checked: the responses
// (data, address, core), that the page was promoted in every slice, that
// reads after the promotion are PB hits for the lines that won their PB
// slot, that a PB hit takes 5 cycles from acceptance to response and an
// NVM hit 27 (the 22-cycle NVM read is the difference: tag read 2, region
// check 1, access and response queue 2), and that a miss goes to memory.
module tb_cloak_top_full;
  import cloak_pkg::*;
  localparam int NC = 4, NS = 4;
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

  cloak_top dut (.clk, .rst_n, .ready, .cfg_threshold(thr),
    .cfg_activation_period(ap), .clr_valid, .clr_req, .clr_ready, .resp_valid, .resp, .resp_ready,
    .tlb_fill_valid(f_valid), .tlb_fill_entry(f_entry), .tlb_fill_size(f_size),
    .tlb_fill_l2tlb_hit(f_l2), .tlb_fill_accessed(f_a), .tlb_fill_dirty(f_d), .tlb_fill_pa(f_pa),
    .tlb_hit_valid(h_valid), .tlb_hit_entry(h_entry), .tlb_hit_pa(h_pa), .ptr_dropped,
    .mem_valid, .mem_req, .mem_ready, .events(ev));

  int n_prom [NS];
  int n_mem, n_pb, n_nvm;
  logic [511:0] ref_data [logic [47:0]];
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) begin
      if (ev[s].promote) n_prom[s]++;
      if (mem_valid[s] && mem_ready[s]) n_mem++;
    end
    for (int c = 0; c < NC; c++) if (resp_valid[c] && resp_ready[c]) begin
      checks++;
      if (resp[c].core != CORE_W'(c) || !ref_data.exists(resp[c].addr)
          || resp[c].data != ref_data[resp[c].addr]) begin
        failures++;
        $display("FAIL response to core %0d addr %h", c, resp[c].addr);
      end
      if (resp[c].src == SRC_PB) n_pb++; else n_nvm++;
    end
  end

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // 16MB slices: Row Index is bits 23:12, the slice bits 25:24
  function automatic logic [47:0] A(input int p, input int s, input int r, input int tl, input int st);
    return {22'(p), 2'(s), 12'(r), 4'(tl), 2'(st), 6'd0};
  endfunction

  task automatic clr(input int c, input clr_op_e op, input logic [47:0] a, input logic [511:0] d);
    @(negedge clk);
    clr_valid[c] = 1; clr_req[c].op = op; clr_req[c].addr = a; clr_req[c].data = d; clr_req[c].core = '0;
    if (op == OP_WRITE) ref_data[a] = d;
    @(posedge clk);
    while (!clr_ready[c]) @(posedge clk);
    @(negedge clk); clr_valid[c] = 0;
  endtask

  // read and return the cycles from request acceptance to response
  task automatic timed_read(input int c, input logic [47:0] a, output int lat);
    int t0;
    @(negedge clk);
    clr_valid[c] = 1; clr_req[c].op = OP_READ; clr_req[c].addr = a; clr_req[c].data = '0;
    @(posedge clk);
    while (!clr_ready[c]) @(posedge clk);
    t0 = 0;
    @(negedge clk); clr_valid[c] = 0;
    while (!resp_valid[c]) begin @(negedge clk); t0++; end
    lat = t0 + 1;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat_nvm, lat_pb;
    thr = 6; ap = 20;
    clr_valid = 0; resp_ready = '1; f_valid = 0; h_valid = 0; mem_ready = '1;
    f_l2 = 0; f_a = 0; f_d = 0;
    for (int c = 0; c < NC; c++) begin
      clr_req[c] = '0; f_entry[c] = 0; h_entry[c] = 0; f_size[c] = PG_4K; f_pa[c] = 0; h_pa[c] = 0;
    end
    for (int s = 0; s < NS; s++) n_prom[s] = 0;
    n_mem = 0; n_pb = 0; n_nvm = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (!ready) @(negedge clk);

    // core c writes 10 lines of page 0x345+c into slice (c+1)%4, row 0xabc+c
    for (int c = 0; c < NC; c++) begin
      fork
        automatic int cc = c;
        for (int i = 0; i < 10; i++) begin
          automatic logic [47:0] a = A('h345 + cc, (cc + 1) % NS, 'habc + cc, i, i % 4);
          clr(cc, OP_WRITE, a, {16{a[31:0] ^ 32'h5a5a_0000}});
        end
      join_none
    end
    wait fork;
    repeat (200) @(negedge clk);
    // before promotion: NVM read latency
    timed_read(0, A('h345, 1, 'habc, 3, 3), lat_nvm);
    chk("NVM hit latency (cycles)", lat_nvm, 27);
    // L1 TLB fills that hit in the L2 TLB: PTRs promote the pages
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      f_valid[c] = 1; f_entry[c] = 6'(c); f_l2[c] = 1; f_pa[c] = A('h345 + c, (c + 1) % NS, 'habc + c, 0, 0);
    end
    @(negedge clk); f_valid = '0;
    repeat (100) @(negedge clk);
    for (int s = 0; s < NS; s++) chk("page promoted in slice", n_prom[s], 1);
    // after promotion: PB hit latency, then all lines from every core
    timed_read(0, A('h345, 1, 'habc, 8, 0), lat_pb);
    chk("PB hit latency (cycles)", lat_pb, 5);
    chk("NVM minus PB latency = NVM read latency", lat_nvm - lat_pb, 22);
    for (int c = 0; c < NC; c++) begin
      fork
        automatic int cc = c;
        for (int i = 0; i < 10; i++) clr(cc, OP_READ, A('h345 + cc, (cc + 1) % NS, 'habc + cc, i, i % 4), '0);
      join_none
    end
    wait fork;
    repeat (100) @(negedge clk);
    // per page, lines 0,1 (region 0) and 4,5 lose their PB slots to lines
    // 2,3,6,7 of region 1 (same page half as the trigger), so 6 of the 10
    // lines are in the PB
    chk("PB responses", n_pb, 1 + 4 * 6);
    chk("NVM responses", n_nvm, 1 + 4 * 4);
    // a miss
    clr(2, OP_READ, A('h777, 0, 5, 0, 0), '0);
    repeat (10) @(negedge clk);
    chk("miss to memory", n_mem, 1);
    chk("no PTR dropped", int'(|ptr_dropped), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
