// taurus_fifo -- synchronous first-word-fall-through FIFO.
//
// Used in the Taurus pipeline for the header FIFO that carries the non-feature
// PHV headers of an ML packet around the MapReduce block, for the non-ML
// bypass path, and for finished MapReduce results waiting for the round-robin
// selector.
//
// Interface: push/din, pop/dout, with dout showing the oldest entry while
// !empty. A push and a pop may happen in the same cycle, also when full (the
// pop frees the slot). count is the occupancy. Pushing when full without a pop,
// or popping when empty, is a protocol error (asserted).
//
// Follows the published design: a FIFO lets non-feature headers skip the
// MapReduce block. This design's own choices: depth, first-word fall-through.
module taurus_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [W-1:0]             din,
  input  logic                     pop,
  output logic [W-1:0]             dout,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push && full |-> pop);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
