// tb_taurus_pkt_buffer -- self-checking test of the three-way split packet queue.
// Each sub-queue is exercised with random pushes and pops against its own
// queue model; checks heads, empty and full flags every cycle, that each
// sub-queue fills at exactly its allocated size, and that a partition reload
// (alloc_we) takes effect.
module tb_taurus_pkt_buffer;
  localparam int W = 16, TOT = 64, S0 = 16, S1 = 32, S2 = 16;
  localparam int CW = $clog2(TOT + 1);
  logic clk = 0, rst_n = 0;
  logic alloc_we;
  logic [CW-1:0] alloc_size [3];
  logic [2:0] push, pop, full, empty;
  logic [W-1:0] din [3], dout [3];
  int checks = 0, failures = 0;
  int size [3];
  int fullseen [3];
  logic [W-1:0] q0 [$], q1 [$], q2 [$];

  taurus_pkt_buffer #(.W(W), .TOTAL(TOT), .Q0(S0), .Q1(S1), .Q2(S2)) dut (
    .clk, .rst_n, .alloc_we, .alloc_size, .push, .din, .pop, .dout, .full, .empty);

  always #5 clk = ~clk;

  function automatic int qsize(input int q);
    return (q == 0) ? q0.size() : (q == 1) ? q1.size() : q2.size();
  endfunction
  function automatic logic [W-1:0] qhead(input int q);
    return (q == 0) ? q0[0] : (q == 1) ? q1[0] : q2[0];
  endfunction

  task automatic run(input int cycles);
    for (int n = 0; n < cycles; n++) begin
      for (int q = 0; q < 3; q++) begin
        checks++;
        if (empty[q] != (qsize(q) == 0) || full[q] != (qsize(q) == size[q]) ||
            (qsize(q) > 0 && dout[q] != qhead(q))) begin
          failures++;
          $display("FAIL q%0d n=%0d size=%0d empty=%0b full=%0b", q, n, qsize(q), empty[q], full[q]);
        end
        if (full[q]) fullseen[q]++;
        pop[q]  = (qsize(q) > 0) && ($urandom_range(0, 9) < (((n / 300) % 2) ? 8 : 2));
        push[q] = ((qsize(q) < size[q]) || pop[q]) && ($urandom_range(0, 9) < 7);
        din[q]  = W'($urandom);
      end
      @(negedge clk);
      if (pop[0]) void'(q0.pop_front());
      if (pop[1]) void'(q1.pop_front());
      if (pop[2]) void'(q2.pop_front());
      if (push[0]) q0.push_back(din[0]);
      if (push[1]) q1.push_back(din[1]);
      if (push[2]) q2.push_back(din[2]);
    end
    push = '0; pop = '0;
  endtask

  task automatic drain();
    while (q0.size() + q1.size() + q2.size() > 0) begin
      for (int q = 0; q < 3; q++) begin
        if (qsize(q) > 0) begin
          checks++;
          if (dout[q] != qhead(q)) begin failures++; $display("FAIL drain q%0d", q); end
        end
        pop[q] = (qsize(q) > 0);
      end
      @(negedge clk);
      if (pop[0]) void'(q0.pop_front());
      if (pop[1]) void'(q1.pop_front());
      if (pop[2]) void'(q2.pop_front());
    end
    pop = '0;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc_we = 0; push = '0; pop = '0;
    for (int q = 0; q < 3; q++) begin din[q] = '0; alloc_size[q] = '0; fullseen[q] = 0; end
    size[0] = S0; size[1] = S1; size[2] = S2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1500);
    drain();
    // re-partition 8 / 40 / 16 and run again
    size[0] = 8; size[1] = 40; size[2] = 16;
    for (int q = 0; q < 3; q++) alloc_size[q] = CW'(size[q]);
    alloc_we = 1; @(negedge clk); alloc_we = 0;
    for (int q = 0; q < 3; q++) fullseen[q] = 0;
    run(1500);
    for (int q = 0; q < 3; q++) begin
      checks++;
      if (fullseen[q] == 0) begin failures++; $display("FAIL q%0d never full", q); end
    end
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
