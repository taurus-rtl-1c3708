// tb_taurus_fifo -- self-checking test of the first-word-fall-through FIFO.
// Random pushes and pops (never illegal ones) against a queue model; checks
// head data, empty, full and count every cycle, including push+pop when full.
module tb_taurus_fifo;
  localparam int W = 8, D = 16;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, full_hits = 0;
  logic [W-1:0] q [$];

  taurus_fifo #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .full, .empty, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      int bias;
      bias = (n / 500) % 2;   // alternate filling and draining phases
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || int'(count) != q.size() ||
          (q.size() > 0 && dout != q[0])) begin
        failures++;
        $display("FAIL n=%0d size=%0d count=%0d empty=%0b full=%0b", n, q.size(), count, empty, full);
      end
      if (full) full_hits++;
      pop  = (q.size() > 0) && ($urandom_range(0, 9) < (bias ? 8 : 3));
      push = ((q.size() < D) || pop) && ($urandom_range(0, 9) < (bias ? 3 : 8));
      din  = W'($urandom);
      @(negedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++;
    if (full_hits == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
