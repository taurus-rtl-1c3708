// tb_taurus_mapreduce -- end-to-end test of the MapReduce block at its full
// 10 x 12 size running the anomaly-detection DNN (6 features, hidden layers of
// 12, 6 and 3 units, one output neuron, sigmoid lookup table).
// The network is placed by taurus_tb_dnn_pkg, configured through the block's
// configuration and weight ports, then fed one feature vector per cycle
// (line rate) followed by a sparse phase. Every result is checked against the
// integer reference model and must appear exactly `latency` cycles after its
// features; back-to-back inputs must give back-to-back outputs.
module tb_taurus_mapreduce;
  import taurus_pkg::*;
  import taurus_tb_dnn_pkg::*;

  localparam int ROWS = 10, COLS = 12, NT = ROWS * COLS;

  logic clk = 0, rst_n = 0;
  logic cfg_we; logic [SRC_W-1:0] cfg_tile; logic [CFG_WORD_W-1:0] cfg_word; logic [31:0] cfg_wdata;
  logic wt_we; logic [SRC_W-1:0] wt_tile; logic [BANK_W-1:0] wt_bank; logic [MU_AW-1:0] wt_addr; data_t wt_data;
  logic feat_valid, out_valid;
  vec_t feat, out;
  int checks = 0, failures = 0, cycle = 0, streak = 0, max_streak = 0;

  taurus_mapreduce dut (.clk, .rst_n, .cfg_we, .cfg_tile, .cfg_word, .cfg_wdata,
    .wt_we, .wt_tile, .wt_bank, .wt_addr, .wt_data, .feat_valid, .feat, .out_valid, .out);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  dnn_map m;
  typedef struct { int t; int v; } exp_t;
  exp_t expq[$];

  task automatic write_cfg(input int tile, input logic [CFG_WORDS*32-1:0] bits);
    for (int wd = 0; wd < CFG_WORDS; wd++) begin
      cfg_we = 1; cfg_tile = SRC_W'(tile); cfg_word = CFG_WORD_W'(wd); cfg_wdata = bits[32*wd +: 32];
      @(negedge clk);
    end
    cfg_we = 0;
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      streak++;
      if (streak > max_streak) max_streak = streak;
      if (expq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        e = expq.pop_front();
        if (cycle != e.t) begin failures++; $display("FAIL latency: at %0d expected %0d", cycle, e.t); end
        if (int'(out[0]) != e.v) begin failures++; $display("FAIL value %0d expected %0d", out[0], e.v); end
      end
    end else streak = 0;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nburst;
    cfg_we = 0; cfg_tile = '0; cfg_word = '0; cfg_wdata = '0;
    wt_we = 0; wt_tile = '0; wt_bank = '0; wt_addr = '0; wt_data = '0;
    feat_valid = 0; feat = '0;
    m = new(ROWS, COLS, '{6, 12, 6, 3, 1});
    m.randomize_model(12, 16);
    checks++;
    if (!m.place()) begin failures++; $display("FAIL DNN does not fit"); end
    $display("DNN placed: %0d CUs, %0d MUs, latency %0d cycles", m.n_cu, m.n_mu, m.latency);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // unconfigured block stays silent even with features arriving
    feat_valid = 1;
    repeat (40) @(negedge clk);
    feat_valid = 0;
    foreach (m.cfg[t]) write_cfg(t, (CFG_WORDS*32)'(m.cfg[t]));
    write_cfg(NT, (CFG_WORDS*32)'(m.ocfg));
    foreach (m.writes[i]) begin
      wt_we = 1; wt_tile = SRC_W'(m.writes[i].tile); wt_bank = BANK_W'(m.writes[i].bank);
      wt_addr = MU_AW'(m.writes[i].addr); wt_data = data_t'(m.writes[i].data);
      @(negedge clk);
    end
    wt_we = 0;
    repeat (4) @(negedge clk);
    // line-rate burst then sparse traffic
    nburst = 400;
    for (int n = 0; n < 800; n++) begin
      int f[$];
      feat_valid = (n < nburst) ? 1'b1 : ($urandom_range(0, 2) == 0);
      feat = '0;
      for (int i = 0; i < 6; i++) begin
        f.push_back($urandom_range(0, 63) - 32);
        feat[i] = data_t'(f[i]);
      end
      for (int l = 6; l < LANES; l++) feat[l] = data_t'($urandom);  // unused lanes: noise
      if (feat_valid) expq.push_back('{t: cycle + m.latency, v: m.ref_run(f)});
      @(negedge clk);
    end
    feat_valid = 0;
    repeat (m.latency + 5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    checks++;
    if (max_streak < nburst) begin failures++; $display("FAIL line rate: longest run %0d", max_streak); end
    $display("line-rate run of %0d results, latency %0d cycles", max_streak, m.latency);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
