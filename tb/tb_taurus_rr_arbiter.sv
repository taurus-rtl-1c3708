// tb_taurus_rr_arbiter -- self-checking test of the round-robin selector.
// Random requests and enables for N = 2 (the pipeline's use) and N = 3;
// a reference pointer model predicts every grant. Also checks that under
// constant contention the two paths alternate.
module tb_taurus_rr_arbiter;
  logic clk = 0, rst_n = 0;
  logic en2, en3;
  logic [1:0] req2, gnt2;
  logic [2:0] req3, gnt3;
  int checks = 0, failures = 0;
  int last2, last3;

  taurus_rr_arbiter #(.N(2)) dut2 (.clk, .rst_n, .en(en2), .req(req2), .grant(gnt2));
  taurus_rr_arbiter #(.N(3)) dut3 (.clk, .rst_n, .en(en3), .req(req3), .grant(gnt3));

  always #5 clk = ~clk;

  function automatic int ref_grant(input int n, input int last, input int req, input bit en);
    if (!en) return 0;
    for (int k = 1; k <= n; k++) begin
      int i;
      i = (last + k) % n;
      if (req[i]) return 1 << i;
    end
    return 0;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e2, e3, prev;
    en2 = 0; en3 = 0; req2 = '0; req3 = '0;
    last2 = 1; last3 = 2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      en2 = ($urandom_range(0, 4) != 0); en3 = ($urandom_range(0, 4) != 0);
      req2 = 2'($urandom); req3 = 3'($urandom);
      #1;
      e2 = ref_grant(2, last2, req2, en2);
      e3 = ref_grant(3, last3, req3, en3);
      checks += 2;
      if (int'(gnt2) != e2) begin failures++; $display("FAIL n2 req=%b gnt=%b exp=%0d", req2, gnt2, e2); end
      if (int'(gnt3) != e3) begin failures++; $display("FAIL n3 req=%b gnt=%b exp=%0d", req3, gnt3, e3); end
      for (int i = 0; i < 2; i++) if (e2[i]) last2 = i;
      for (int i = 0; i < 3; i++) if (e3[i]) last3 = i;
      @(negedge clk);
    end
    // constant contention: grants alternate
    en2 = 1; req2 = 2'b11; prev = -1;
    for (int n = 0; n < 20; n++) begin
      #1;
      checks++;
      if (gnt2 == 2'b00 || gnt2 == 2'b11 || int'(gnt2) == prev) begin
        failures++; $display("FAIL no alternation gnt=%b", gnt2);
      end
      prev = int'(gnt2);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
