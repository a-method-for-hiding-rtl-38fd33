// tb_pb_promote: random PTR match vectors against an independent model of
// the two-step promotion: region-0 lines first, region-1 lines overwrite
// a shared slot unless the region-0 line is in the triggering page half
// and the region-1 line is not. Also replays the published example
// (A1, A2 in region 0; A3, A4, A5 in region 1 with A3 taking A1's slot).
module tb_pb_promote;
  import cloak_pkg::*;
  int checks = 0, failures = 0;
  logic [63:0] match, half;
  logic trig;
  logic [6:0] thr, pop;
  logic [31:0] s1, s2, reg_bits;
  logic [5:0] res;
  logic ok, conflict;

  pb_promote dut (.ptr_match(match), .line_half(half), .trig_half(trig), .threshold(thr),
    .step1_mask(s1), .step2_mask(s2), .region_bits(reg_bits), .population(pop),
    .residency(res), .promote_ok(ok), .conflict(conflict));

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  task automatic model_check();
    int p, r; logic [31:0] e1, e2; logic c;
    p = 0; r = 0; c = 0;
    for (int i = 0; i < 64; i++) p += int'(match[i]);
    for (int s = 0; s < 32; s++) begin
      logic a, b;
      a = match[s]; b = match[s + 32];
      e1[s] = a;
      if (a && b) begin
        c = 1;
        e2[s] = !(half[s] == trig && half[s + 32] != trig);
      end else e2[s] = b;
      if (a || b) r++;
    end
    chk("pop", pop, p);
    chk("res", res, r);
    chk("step1", s1, e1);
    chk("step2", s2, e2);
    chk("region", reg_bits, e2);
    chk("ok", ok, p >= int'(thr));
    chk("conflict", conflict, c);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // published example: row slots 0 (A1) and 30 (A2) in region 0;
    // slots 32 (A3), 33 (A4), 63 (A5) in region 1; trigger in upper half
    match = '0; half = '0;
    match[0] = 1; match[30] = 1; match[32] = 1; match[33] = 1; match[63] = 1;
    half[32] = 1; half[33] = 1; half[63] = 1; trig = 1; thr = 6;
    #1;
    chk("ex step1", s1, 32'h4000_0001);
    chk("ex region", reg_bits, 32'h8000_0003);
    chk("ex res", res, 4);
    chk("ex below threshold 6", ok, 0);
    thr = 5; #1; chk("ex at threshold 5", ok, 1);
    model_check();
    // trigger in lower half: A1 keeps its slot
    trig = 0; #1;
    chk("ex2 region", reg_bits, 32'h8000_0002);
    model_check();
    for (int k = 0; k < 300; k++) begin
      match = {$urandom, $urandom}; half = {$urandom, $urandom};
      if (k % 3 == 0) match = match & {$urandom, $urandom};
      trig = 1'($urandom); thr = 7'($urandom_range(64));
      #1;
      model_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
