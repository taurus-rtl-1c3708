// tb_taurus_pipeline -- end-to-end test of the Taurus pipeline at reduced size
// (8 x 8 grid, 16 ML credits, 4-entry bypass FIFO, 16/32/16 packet sub-queues)
// running the anomaly-detection DNN on mixed ML and non-ML traffic at full
// offered load. The small credit count and queues make every mechanism happen:
// ML path, bypass, overtaking, RR contention, credit stall, parser back-pressure.
module tb_taurus_pipeline;
  int checks, failures;
  bit done;

  taurus_pipeline_env #(.FULL(0), .ROWS(8), .COLS(8), .ML_INFLIGHT(16), .BYP_DEPTH(4),
                        .Q_TOTAL(64), .Q_PRE(16), .Q_MR(32), .Q_POST(16), .NPKT(600),
                        .REQUIRE(6'b111111)) env (.checks, .failures, .done);

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
