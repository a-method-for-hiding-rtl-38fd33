// tb_l2l3_xbar: four senders and four receivers with random traffic and
// random back-pressure. Every item must arrive once, at the receiver it
// named, in order per sender, with dst_src naming its sender; and when all
// senders target one always-ready receiver, grants must rotate.
module tb_l2l3_xbar;
  typedef logic [15:0] item_t;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] src_valid, src_ready, dst_valid, dst_ready;
  logic [1:0] src_dst [4];
  item_t      src_data [4];
  item_t      dst_data [4];
  logic [1:0] dst_src [4];

  l2l3_xbar #(.N_SRC(4), .N_DST(4), .T(item_t)) dut (.clk, .rst_n, .src_valid, .src_dst,
    .src_data, .src_ready, .dst_valid, .dst_data, .dst_src, .dst_ready);

  int sent [4], got_total;
  int next_seq [4];            // next expected sequence number per sender
  logic fair_mode;
  int last_src;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // item = {src[1:0], dst[1:0], seq[11:0]}
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < 4; d++) if (dst_valid[d] && dst_ready[d]) begin
      chk("dst field", dst_data[d][13:12], d);
      chk("src field", dst_data[d][15:14], dst_src[d]);
      chk("in order", dst_data[d][11:0], next_seq[dst_src[d]] % 4096);
      next_seq[dst_src[d]]++;
      got_total++;
      if (fair_mode) begin
        if (last_src >= 0) chk("round robin", dst_src[d], (last_src + 1) % 4);
        last_src = dst_src[d];
      end
    end
  end

  // senders: new item after each accepted one
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 4; s++) if (src_valid[s] && src_ready[s]) begin
      sent[s]++;
      src_valid[s] <= 1'b0;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fair_mode = 0; last_src = -1; got_total = 0;
    src_valid = 0; dst_ready = 0;
    for (int s = 0; s < 4; s++) begin sent[s] = 0; next_seq[s] = 0; src_dst[s] = 0; src_data[s] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (2000) begin
      @(negedge clk);
      for (int s = 0; s < 4; s++) if (!src_valid[s] && $urandom_range(3) != 0) begin
        logic [1:0] d; d = 2'($urandom);
        src_valid[s] = 1; src_dst[s] = d; src_data[s] = {2'(s), d, 12'(sent[s])};
      end
      dst_ready = 4'($urandom);
    end
    // drain
    dst_ready = '1;
    repeat (10) @(negedge clk);
    chk("all delivered", got_total, sent[0] + sent[1] + sent[2] + sent[3]);
    // fairness: everybody always wants receiver 2
    fair_mode = 1;
    repeat (40) begin
      @(negedge clk);
      for (int s = 0; s < 4; s++) if (!src_valid[s]) begin
        src_valid[s] = 1; src_dst[s] = 2; src_data[s] = {2'(s), 2'd2, 12'(sent[s])};
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
