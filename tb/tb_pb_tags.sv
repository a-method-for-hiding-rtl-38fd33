// tb_pb_tags: checks the Page Buffer Tags against a reference model:
// page lookup, Region-bit check, load (Replacement = Residency x
// Activation Period), countdown by one per cycle, recomputation on PB
// read/write with Residency -1/+1, residency decrement on LLC
// invalidate/evict, and victim choice (empty first, then counter at 0).
module tb_pb_tags;
  import cloak_pkg::*;
  localparam int NPB = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [9:0] ap;
  logic [35:0] lk_ppn, ld_ppn, nt_ppn;
  logic lk_hit, q_region, q_region_ok, vic_avail, vic_in_use, ld_en, drop_en, acc_en, acc_write;
  logic nt_en, nt_region, nt_dec;
  logic [1:0] lk_idx, q_idx, vic_idx, ld_idx, drop_idx, acc_idx;
  logic [4:0] q_slot, nt_slot;
  logic [31:0] ld_region;
  logic [5:0] ld_res;
  logic [NPB-1:0] st_valid;
  logic [NPB-1:0][5:0] st_res;
  logic [NPB-1:0][9:0] st_repl;

  pb_tags #(.NUM_PB(NPB)) dut (.clk, .rst_n, .activation_period(ap), .lk_ppn, .lk_hit, .lk_idx,
    .q_idx, .q_slot, .q_region, .q_region_ok, .vic_avail, .vic_idx, .vic_in_use,
    .ld_en, .ld_idx, .ld_ppn, .ld_region, .ld_residency(ld_res), .drop_en, .drop_idx,
    .acc_en, .acc_write, .acc_idx, .nt_en, .nt_ppn, .nt_slot, .nt_region, .nt_dec,
    .st_valid, .st_residency(st_res), .st_replacement(st_repl));

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic idle_inputs();
    ld_en = 0; drop_en = 0; acc_en = 0; nt_en = 0; acc_write = 0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ap = 20; idle_inputs(); lk_ppn = 0; ld_ppn = 0; nt_ppn = 0; q_idx = 0; q_slot = 0;
    q_region = 0; ld_idx = 0; drop_idx = 0; acc_idx = 0; nt_slot = 0; nt_region = 0;
    ld_region = 0; ld_res = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    #1;
    chk("empty victim avail", vic_avail, 1);
    chk("empty victim idx", vic_idx, 0);
    chk("empty not in use", vic_in_use, 0);
    lk_ppn = 36'h123; #1; chk("no hit after reset", lk_hit, 0);
    // load PB 0 with page 0x123: 5 lines, region bits 0x8000_0003
    @(negedge clk);
    ld_en = 1; ld_idx = 0; ld_ppn = 36'h123; ld_region = 32'h8000_0003; ld_res = 5;
    @(negedge clk); idle_inputs();
    // the counter is set to 5 x 20 = 100 by the load
    chk("repl after load", st_repl[0], 100);
    chk("res after load", st_res[0], 5);
    lk_ppn = 36'h123; #1;
    chk("lookup hit", lk_hit, 1); chk("lookup idx", lk_idx, 0);
    q_idx = 0; q_slot = 1; q_region = 1; #1; chk("region ok", q_region_ok, 1);
    q_slot = 2; q_region = 1; #1; chk("region no", q_region_ok, 0);
    q_slot = 2; q_region = 0; #1; chk("region 0 ok", q_region_ok, 1);
    chk("victim is empty PB 1", vic_idx, 1);
    // countdown
    repeat (10) @(negedge clk);
    chk("countdown", st_repl[0], 100 - 10);
    // PB read: repl = 5 * 20 recomputed from residency before access, res 4
    acc_en = 1; acc_idx = 0; acc_write = 0;
    @(negedge clk); idle_inputs();
    chk("repl after read", st_repl[0], 100);
    chk("res after read", st_res[0], 4);
    // PB write: repl = 4 * 20, res 5
    acc_en = 1; acc_idx = 0; acc_write = 1;
    @(negedge clk); idle_inputs();
    chk("repl after write", st_repl[0], 80);
    chk("res after write", st_res[0], 5);
    // invalidate notify: region bit of slot 31 is 1
    nt_en = 1; nt_ppn = 36'h123; nt_slot = 31; nt_region = 0; #1;
    chk("nt no match (region)", nt_dec, 0);
    nt_region = 1; #1; chk("nt match", nt_dec, 1);
    @(negedge clk); idle_inputs();
    chk("res after notify", st_res[0], 4);
    nt_en = 1; nt_ppn = 36'h124; nt_slot = 31; nt_region = 1; #1;
    chk("nt other page", nt_dec, 0);
    idle_inputs();
    // fill the other PBs; then no victim until a counter reaches 0
    for (int p = 1; p < NPB; p++) begin
      @(negedge clk);
      ld_en = 1; ld_idx = 2'(p); ld_ppn = 36'(p * 1000); ld_region = '0; ld_res = 6'(p);
    end
    @(negedge clk); idle_inputs(); #1;
    chk("no victim", vic_avail, 0);
    // PB 1 has 1 line -> counter 20: it becomes the victim first
    repeat (20) @(negedge clk); #1;
    chk("victim PB1", vic_avail, 1);
    chk("victim idx 1", vic_idx, 1);
    chk("victim in use", vic_in_use, 1);
    // drop it
    drop_en = 1; drop_idx = 1;
    @(negedge clk); idle_inputs();
    chk("dropped", st_valid[1], 0);
    lk_ppn = 36'd1000; #1; chk("dropped no hit", lk_hit, 0);
    // saturation of the product: 32 lines x 40 = 1280 > 1023
    ap = 40; ld_en = 1; ld_idx = 1; ld_ppn = 36'h777; ld_region = '1; ld_res = 32;
    @(negedge clk); idle_inputs();
    chk("saturated", st_repl[1], 1023);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
