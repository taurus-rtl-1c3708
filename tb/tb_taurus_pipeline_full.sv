// tb_taurus_pipeline_full -- the Taurus pipeline with every parameter at its
// default (10 x 12 MapReduce grid, 256 ML credits, 512-entry packet buffer)
// carrying mixed traffic end to end: the anomaly-detection DNN is configured
// into the grid, 400 packets (two thirds ML, one third non-ML) go from the
// parser port to the scheduler port, and every result, body pairing and
// bypass is checked. At these sizes the credits and queues never run out, so
// only the ML path, bypass, overtaking and RR contention are required.
module tb_taurus_pipeline_full;
  int checks, failures;
  bit done;

  taurus_pipeline_env #(.FULL(1), .ROWS(10), .COLS(12), .ML_INFLIGHT(256), .BYP_DEPTH(16),
                        .Q_TOTAL(512), .Q_PRE(128), .Q_MR(256), .Q_POST(128), .NPKT(400),
                        .REQUIRE(6'b001111)) env (.checks, .failures, .done);

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge done) begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
