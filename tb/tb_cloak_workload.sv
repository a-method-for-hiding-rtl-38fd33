// tb_cloak_workload: random traffic on the four-core Cloak LLC (four slices
// of 16 rows with 4 PBs each), standing in for an application: each core
// works on its own set of pages with spatial locality inside a page (runs
// of consecutive lines), mixing reads, L2 victim writes, invalidations, L1
// TLB fills (4KB and 2MB pages, with random L2-TLB-hit / Accessed / Dirty
// flags) and TLB hits to other chunks of a huge page.
//
// A reference copy of the LLC contents checks every response: data,
// address, receiving core; every read must be answered exactly once, by a
// response or as a miss sent to memory on behalf of the core that asked.
// A core waits for the answer to its read before its next request, so the
// reference order is the issue order. The run reports the fraction of LLC
// read hits served from page buffers, and fails if no page was promoted or
// no read hit a PB.
module tb_cloak_workload;
  import cloak_pkg::*;
  localparam int RB = 4, NC = 4, NS = 4;
  localparam int OPS = 1500;          // requests per core
  localparam int PAGES = 6;           // pages per core
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

  int n_pb, n_nvm, n_miss, n_prom, n_drop;
  logic [511:0] ref_data [logic [47:0]];
  int pending [NC][logic [47:0]];

  function automatic void retire(input int c, input logic [47:0] a, input string how);
    checks++;
    if (pending[c].exists(a) && pending[c][a] > 0) pending[c][a]--;
    else begin failures++; $display("FAIL %s for core %0d addr %h not requested", how, c, a); end
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) begin
      if (ev[s].promote) n_prom++;
      if (mem_valid[s] && mem_ready[s]) begin
        n_miss++;
        retire(int'(mem_req[s].core), mem_req[s].addr, "memory request");
      end
    end
    for (int c = 0; c < NC; c++) begin
      if (ptr_dropped[c]) n_drop++;
      if (resp_valid[c] && resp_ready[c]) begin
        checks++;
        if (resp[c].core != CORE_W'(c) || !ref_data.exists(resp[c].addr)
            || resp[c].data != ref_data[resp[c].addr]) begin
          failures++;
          $display("FAIL response to core %0d addr %h", c, resp[c].addr);
        end
        if (resp[c].src == SRC_PB) n_pb++; else n_nvm++;
        retire(c, resp[c].addr, "response");
      end
    end
  end

  // page p of core c: a fixed slice and row, page number unique per core
  function automatic logic [47:0] A(input int c, input int p, input int line);
    int s = (c + p) % NS;
    int r = (c * 5 + p * 3) % (1 << RB);
    return {26'(c * 64 + p + 1), 2'(s), 4'(r), 6'(line), 6'd0};
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
    if (op == OP_READ) while (pending[c][a] != 0) @(negedge clk);
  endtask

  task automatic core(input int c);
    int p, line, run;
    p = 0; line = 0; run = 0;
    for (int n = 0; n < OPS; n++) begin
      int k = $urandom_range(99);
      if (run == 0) begin            // jump to another page and line
        p = $urandom_range(PAGES - 1); line = $urandom_range(63); run = $urandom_range(12, 1);
      end
      if (k < 45) clr(c, OP_READ, A(c, p, line), '0);
      else if (k < 80) clr(c, OP_WRITE, A(c, p, line), {16{32'($urandom)}});
      else if (k < 83) clr(c, OP_INV, A(c, p, line), '0);
      else if (k < 97) begin
        @(negedge clk);
        f_valid[c] = 1; f_entry[c] = 6'(p); f_size[c] = ($urandom_range(4) == 0) ? PG_2M : PG_4K;
        f_l2[c] = $urandom_range(1); f_a[c] = $urandom_range(1); f_d[c] = $urandom_range(1);
        f_pa[c] = A(c, p, line);
        @(negedge clk); f_valid[c] = 0;
      end else begin
        @(negedge clk);
        h_valid[c] = 1; h_entry[c] = 6'(p); h_pa[c] = A(c, $urandom_range(PAGES - 1), line);
        @(negedge clk); h_valid[c] = 0;
      end
      line = (line + 1) % 64; run--;
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    thr = 6; ap = 20;
    clr_valid = 0; resp_ready = '1; f_valid = 0; h_valid = 0; mem_ready = '1;
    f_l2 = 0; f_a = 0; f_d = 0;
    for (int c = 0; c < NC; c++) begin
      clr_req[c] = '0; f_entry[c] = 0; h_entry[c] = 0; f_size[c] = PG_4K; f_pa[c] = 0; h_pa[c] = 0;
    end
    n_pb = 0; n_nvm = 0; n_miss = 0; n_prom = 0; n_drop = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (!ready) @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      fork
        automatic int cc = c;
        core(cc);
      join_none
    end
    wait fork;
    repeat (200) @(negedge clk);
    checks++;
    if (n_prom == 0) begin failures++; $display("FAIL no promotion"); end
    checks++;
    if (n_pb == 0) begin failures++; $display("FAIL no PB hit"); end
    $display("reads: PB %0d NVM %0d miss %0d; PB share of LLC hits %0d%%; promotions %0d; PTRs dropped %0d",
      n_pb, n_nvm, n_miss, (100 * n_pb) / (n_pb + n_nvm + 1), n_prom, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
