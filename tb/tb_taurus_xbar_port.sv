// tb_taurus_xbar_port -- self-checking test of one static interconnect port.
// Random per-lane (source, lane) selections over 7 sources plus the feature
// field and the zero source; random source data every cycle. Checks that the
// output equals the selection made 1 + delay cycles earlier and that valid
// follows the chosen valid source with the same latency.
module tb_taurus_xbar_port;
  import taurus_pkg::*;

  localparam int NS = 7;
  logic clk = 0, rst_n = 0;
  port_cfg_t cfg;
  vec_t src_vec [NS];
  data_t src_lane [NS*LANES];
  logic src_valid [NS];
  vec_t feat;
  logic feat_valid, out_valid;
  vec_t y;
  int checks = 0, failures = 0;

  taurus_xbar_port #(.NSRC(NS)) dut (.clk, .rst_n, .cfg, .src_lane, .src_valid, .feat,
                                     .feat_valid, .out_valid, .y);

  always #5 clk = ~clk;

  always_comb
    for (int s = 0; s < NS; s++)
      for (int l = 0; l < LANES; l++) src_lane[s*LANES + l] = src_vec[s][l];

  // history of expected (valid, vector) per cycle
  logic hv [$];
  vec_t hx [$];

  function automatic vec_t pick();
    vec_t r;
    for (int l = 0; l < LANES; l++) begin
      int s;
      s = int'(cfg.src[l]);
      if (s == int'(SRC_FEAT)) r[l] = feat[cfg.lane[l]];
      else if (s < NS)         r[l] = src_vec[s][cfg.lane[l]];
      else                     r[l] = '0;
    end
    return r;
  endfunction

  function automatic logic pickv();
    int s;
    s = int'(cfg.vsrc);
    if (s == int'(SRC_FEAT)) return feat_valid;
    if (s < NS) return src_valid[s];
    return 1'b0;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < LANES; l++) begin cfg.src[l] = SRC_ZERO; cfg.lane[l] = '0; end
    cfg.vsrc = SRC_ZERO; cfg.delay = '0;
    feat = '0; feat_valid = 0;
    for (int s = 0; s < NS; s++) begin src_vec[s] = '0; src_valid[s] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int epoch = 0; epoch < 20; epoch++) begin
      int d;
      for (int l = 0; l < LANES; l++) begin
        int r;
        r = $urandom_range(0, NS + 1);
        cfg.src[l]  = (r == NS) ? SRC_FEAT : (r == NS + 1) ? SRC_ZERO : SRC_W'(r);
        cfg.lane[l] = LANE_W'($urandom_range(0, LANES - 1));
      end
      case ($urandom_range(0, 2))
        0: cfg.vsrc = SRC_FEAT;
        1: cfg.vsrc = SRC_W'($urandom_range(0, NS - 1));
        default: cfg.vsrc = SRC_ZERO;
      endcase
      d = $urandom_range(0, (1 << DLY_W) - 1);
      cfg.delay = DLY_W'(d);
      hv.delete(); hx.delete();
      for (int n = 0; n < 60; n++) begin
        for (int s = 0; s < NS; s++) begin
          src_valid[s] = $urandom_range(0, 1);
          for (int l = 0; l < LANES; l++) src_vec[s][l] = data_t'($urandom_range(0, 255));
        end
        feat_valid = $urandom_range(0, 1);
        for (int l = 0; l < LANES; l++) feat[l] = data_t'($urandom_range(0, 255));
        hv.push_back(pickv()); hx.push_back(pick());
        @(negedge clk);
        // value selected d cycles before the last edge
        if (hv.size() > d) begin
          checks++;
          if (out_valid != hv[hv.size() - 1 - d] || y != hx[hx.size() - 1 - d]) begin
            failures++;
            $display("FAIL epoch %0d n %0d delay %0d valid %0b/%0b", epoch, n, d,
                     out_valid, hv[hv.size() - 1 - d]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
