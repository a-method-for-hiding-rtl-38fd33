// sync_fifo: small synchronous FIFO of items of type T (helper).
//
// DEPTH entries, registered storage, first-word-fall-through output:
// out_valid/out_data show the oldest entry; it leaves when out_ready is
// high. A push when full is a protocol error (asserted). `count` is the
// current occupancy, so that a producer can reserve room in advance.
module sync_fifo #(
  parameter int unsigned DEPTH = 8,
  parameter type T = logic [7:0],
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  T            in_data,
  output logic        out_valid,
  output T            out_data,
  input  logic        out_ready,
  output logic [AW:0] count
);
  T             mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic          pop;

  assign pop       = out_valid && out_ready;
  assign out_valid = count != '0;
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (count < (AW+1)'(DEPTH) || pop))
    else $error("sync_fifo: push while full");
endmodule
