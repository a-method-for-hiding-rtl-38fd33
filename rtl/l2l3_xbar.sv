// l2l3_xbar: one direction of the L2/L3 interface network, a crossbar from
// N_SRC senders to N_DST receivers with valid/ready handshakes.
//
// The published design only names this network; this is the simplest
// network that does the job. Each sender presents an item of type T and the
// index of its receiver (src_dst). Each receiver has a round-robin arbiter
// over the senders that target it; the winner's item is passed through
// combinationally (no buffering, zero added latency) and is consumed when
// the receiver is ready. dst_src tells the receiver which sender won. The
// round-robin pointer of a receiver moves past the winner after each
// accepted transfer, so no sender is starved.
//
// The same module carries CLRs and PTRs from cores to slices and responses
// from slices back to cores.
module l2l3_xbar #(
  parameter int unsigned N_SRC = 4,
  parameter int unsigned N_DST = 4,
  parameter type T = logic [7:0],
  localparam int unsigned SW = (N_SRC > 1) ? $clog2(N_SRC) : 1,
  localparam int unsigned DW = (N_DST > 1) ? $clog2(N_DST) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_SRC-1:0]  src_valid,
  input  logic [DW-1:0]     src_dst   [N_SRC],
  input  T                  src_data  [N_SRC],
  output logic [N_SRC-1:0]  src_ready,
  output logic [N_DST-1:0]  dst_valid,
  output T                  dst_data  [N_DST],
  output logic [SW-1:0]     dst_src   [N_DST],
  input  logic [N_DST-1:0]  dst_ready
);
  logic [SW-1:0] rr_ptr [N_DST];

  // arbitration does not look at dst_ready, and the ready path below does not
  // feed back into it: there is no combinational path from dst_ready to
  // dst_valid
  always_comb begin
    for (int d = 0; d < N_DST; d++) begin
      logic found;
      found       = 1'b0;
      dst_valid[d] = 1'b0;
      dst_src[d]   = '0;
      dst_data[d]  = src_data[0];
      // scan senders starting at the round-robin pointer
      for (int k = 0; k < N_SRC; k++) begin
        int unsigned s;
        s = (int'(rr_ptr[d]) + k) % N_SRC;
        if (!found && src_valid[s] && src_dst[s] == DW'(d)) begin
          found        = 1'b1;
          dst_valid[d] = 1'b1;
          dst_src[d]   = SW'(s);
          dst_data[d]  = src_data[s];
        end
      end
    end
  end

  always_comb begin
    src_ready = '0;
    for (int d = 0; d < N_DST; d++)
      if (dst_valid[d] && dst_ready[d]) src_ready[dst_src[d]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < N_DST; d++) rr_ptr[d] <= '0;
    end else begin
      for (int d = 0; d < N_DST; d++)
        if (dst_valid[d] && dst_ready[d])
          rr_ptr[d] <= (dst_src[d] == SW'(N_SRC-1)) ? '0 : dst_src[d] + 1'b1;
    end
  end

  // every accepted item goes to exactly one receiver
  for (genvar s = 0; s < N_SRC; s++) begin : g_chk
    a_dst_range: assert property (@(posedge clk) disable iff (!rst_n)
      src_valid[s] |-> int'(src_dst[s]) < N_DST)
      else $error("l2l3_xbar: sender %0d targets a missing receiver", s);
  end
endmodule
