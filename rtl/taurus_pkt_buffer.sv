// taurus_pkt_buffer -- the switch packet queue split into three sub-queues.
//
// While a packet's header vector (PHV) is processed, its body waits in the
// packet queue. Taurus splits that single queue into three FIFO sub-queues, one
// beside each stage group: q0 for the preprocessing MATs, q1 for the MapReduce
// block and q2 for the postprocessing MATs. Each sub-queue is a circular region
// [base, base+size) of one shared memory of TOTAL entries; the sizes are set in
// proportion to the pipeline depth each queue has to cover.
//
// Entries are packet-body descriptors of W bits (e.g. a handle into the packet
// memory). Per cycle each sub-queue can push one and pop one entry.
// dout[q] shows the head of q while !empty[q] (first-word fall-through).
// The partition is loaded from alloc_size[] when alloc_we is pulsed, which is
// allowed only while all three sub-queues are empty (asserted); after reset it
// is the parameter split Q0/Q1/Q2. Sizes are assumed to sum to at most TOTAL.
//
// Follows the published design: one queue split into three sub-queues,
// allocated by pipeline depth. This design's own choices: descriptor width,
// total size, the default split, and the reprogramming port.
module taurus_pkt_buffer #(
  parameter int unsigned W     = 16,
  parameter int unsigned TOTAL = 512,
  parameter int unsigned Q0    = 128,   // preprocessing MATs
  parameter int unsigned Q1    = 256,   // MapReduce block
  parameter int unsigned Q2    = 128    // postprocessing MATs
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       alloc_we,
  input  logic [$clog2(TOTAL+1)-1:0] alloc_size [3],
  input  logic [2:0]                 push,
  input  logic [W-1:0]               din   [3],
  input  logic [2:0]                 pop,
  output logic [W-1:0]               dout  [3],
  output logic [2:0]                 full,
  output logic [2:0]                 empty
);

  localparam int unsigned AW = $clog2(TOTAL);
  localparam int unsigned CW = $clog2(TOTAL + 1);

  logic [W-1:0]  mem [TOTAL];
  logic [CW-1:0] base [3], size [3], head [3], tail [3], count [3];

  for (genvar q = 0; q < 3; q++) begin : g_q
    assign empty[q] = (count[q] == '0);
    assign full[q]  = (count[q] == size[q]);
    assign dout[q]  = mem[AW'(base[q] + head[q])];
  end

  function automatic logic [CW-1:0] wrap(input logic [CW-1:0] p, input logic [CW-1:0] sz);
    return (p + 1'b1 == sz) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      size[0] <= CW'(Q0);
      size[1] <= CW'(Q1);
      size[2] <= CW'(Q2);
      base[0] <= '0;
      base[1] <= CW'(Q0);
      base[2] <= CW'(Q0 + Q1);
      for (int q = 0; q < 3; q++) begin
        head[q]  <= '0;
        tail[q]  <= '0;
        count[q] <= '0;
      end
    end else if (alloc_we) begin
      size[0] <= alloc_size[0];
      size[1] <= alloc_size[1];
      size[2] <= alloc_size[2];
      base[0] <= '0;
      base[1] <= alloc_size[0];
      base[2] <= alloc_size[0] + alloc_size[1];
      for (int q = 0; q < 3; q++) begin
        head[q]  <= '0;
        tail[q]  <= '0;
        count[q] <= '0;
      end
    end else begin
      for (int q = 0; q < 3; q++) begin
        if (push[q]) tail[q] <= wrap(tail[q], size[q]);
        if (pop[q])  head[q] <= wrap(head[q], size[q]);
        count[q] <= count[q] + CW'(push[q]) - CW'(pop[q]);
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int q = 0; q < 3; q++)
      if (push[q] && !alloc_we) mem[AW'(base[q] + tail[q])] <= din[q];
  end

  for (genvar q = 0; q < 3; q++) begin : g_chk
    a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push[q] && full[q] |-> pop[q]);
    a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop[q] |-> !empty[q]);
  end
  a_alloc_idle: assert property (@(posedge clk) disable iff (!rst_n) alloc_we |-> &empty);

endmodule
