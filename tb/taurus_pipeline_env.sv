// taurus_pipeline_env -- reusable end-to-end environment for taurus_pipeline.
//
// Surrounds the pipeline with behavioural stand-ins for the parts it connects
// to but does not contain:
//  * a parser source issuing PHVs (header = packet id, six raw features) and
//    body descriptors (= low 16 bits of the id), honouring par_ready;
//  * a preprocessing MAT model: PRE_LAT cycles, sets the `ml` flag for two of
//    every three packets (by id), and holds its output while pre_in_ready is low;
//  * a postprocessing MAT model: POST_LAT cycles, passes the PHV through;
//  * a scheduler sink that checks every packet: body paired with its own PHV,
//    ML packets carry the anomaly-detection DNN's output (reference model) in
//    field 0, non-ML packets their untouched fields, nothing lost or duplicated.
// It configures the MapReduce block with the DNN (taurus_tb_dnn_pkg) through
// the pipeline's configuration and weight ports, runs NPKT packets and counts
// how often each mechanism happened: ML path, bypass path, a bypass packet
// overtaking an earlier ML packet, RR contention, ML credit stall
// (pre_in_ready low), parser back-pressure (par_ready low). Mechanisms listed
// in REQUIRE (bit 0 ML, 1 bypass, 2 overtake, 3 RR contention, 4 credit stall,
// 5 parser back-pressure) count a failure if they never happened.
// FULL = 1 instantiates the pipeline with its default parameters.
module taurus_pipeline_env #(
  parameter bit          FULL        = 0,
  parameter int unsigned ROWS        = 8,
  parameter int unsigned COLS        = 8,
  parameter int unsigned ML_INFLIGHT = 16,
  parameter int unsigned BYP_DEPTH   = 4,
  parameter int unsigned Q_TOTAL     = 64,
  parameter int unsigned Q_PRE       = 16,
  parameter int unsigned Q_MR        = 32,
  parameter int unsigned Q_POST      = 16,
  parameter int          NPKT        = 600,
  parameter int          PRE_LAT     = 6,
  parameter int          POST_LAT    = 5,
  parameter int          RATE_PCT    = 100,    // offered load, percent of cycles
  parameter logic [5:0]  REQUIRE     = 6'b111111
) (
  output int checks,
  output int failures,
  output bit done
);
  import taurus_pkg::*;
  import taurus_tb_dnn_pkg::*;

  localparam int NT = ROWS * COLS;
  localparam int QW = $clog2(Q_TOTAL + 1);

  logic clk = 0, rst_n = 0;
  logic par_valid, par_ready; phv_t par_phv; body_t par_body;
  logic pre_out_valid; phv_t pre_out_phv;
  logic pre_in_valid, pre_in_ready; phv_t pre_in_phv;
  logic post_out_valid; phv_t post_out_phv;
  logic post_in_valid; phv_t post_in_phv;
  logic sch_valid; phv_t sch_phv; body_t sch_body;
  logic cfg_we; logic [SRC_W-1:0] cfg_tile; logic [CFG_WORD_W-1:0] cfg_word; logic [31:0] cfg_wdata;
  logic wt_we; logic [SRC_W-1:0] wt_tile; logic [BANK_W-1:0] wt_bank; logic [MU_AW-1:0] wt_addr; data_t wt_data;
  logic alloc_we;
  logic [QW-1:0] alloc_size [3];

  logic rr_both;   // both paths request the RR selector

  if (FULL) begin : g_full
    taurus_pipeline dut (.*);
    assign rr_both = (dut.rr_req == 2'b11);
  end else begin : g_small
    taurus_pipeline #(.ROWS(ROWS), .COLS(COLS), .ML_INFLIGHT(ML_INFLIGHT), .BYP_DEPTH(BYP_DEPTH),
                      .Q_TOTAL(Q_TOTAL), .Q_PRE(Q_PRE), .Q_MR(Q_MR), .Q_POST(Q_POST)) dut (.*);
    assign rr_both = (dut.rr_req == 2'b11);
  end

  always #5 clk = ~clk;

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  dnn_map m;
  int  exp_val [int];        // expected DNN output per ML packet id
  vec_t sent_fields [int];   // fields as sent, per id
  int  t_in [int];
  int  n_in = 0, n_out = 0, next_id = 0, max_ml_id_out = -1;
  int  cnt_ml = 0, cnt_byp = 0, cnt_overtake = 0, cnt_rr = 0, cnt_stall = 0, cnt_bp = 0;
  int  min_ml_lat = 1 << 30, min_byp_lat = 1 << 30;
  bit  traffic_on = 0;
  bit  par_taken = 0;

  typedef struct { phv_t p; int t; } slot_t;
  slot_t pre_q [$];
  slot_t post_q [$];

  // ---------------- parser source ----------------
  always @(negedge clk) begin
    if (!par_valid || par_taken) begin   // previous offer taken (or none)
      par_valid = 0;
      par_taken = 0;
      if (traffic_on && next_id < NPKT && $urandom_range(0, 99) < RATE_PCT) begin
        int f[$];
        par_phv = '0;
        par_phv.hdr = HDR_W'(next_id) | (HDR_W'($urandom) << 32);
        for (int i = 0; i < 6; i++) begin
          f.push_back($urandom_range(0, 63) - 32);
          par_phv.fields[i] = data_t'(f[i]);
        end
        par_body  = body_t'(next_id);
        par_valid = 1;
        sent_fields[next_id] = par_phv.fields;
        if (next_id % 3 != 0) exp_val[next_id] = m.ref_run(f);
        next_id++;
      end
    end
  end

  // ---------------- handshakes, MAT models, sink (sampled at the edge) ------
  always @(posedge clk) begin
    if (rst_n) begin
      if (par_valid && par_ready) begin
        t_in[int'(par_phv.hdr[31:0])] = cycle;
        par_taken = 1;
      end
      if (par_valid && !par_ready) cnt_bp++;
      if (pre_out_valid) begin
        slot_t s;
        s.p = pre_out_phv;
        s.p.ml = (pre_out_phv.hdr[31:0] % 3 != 0);   // the MAT's ML decision
        s.t = cycle + PRE_LAT;
        pre_q.push_back(s);
      end
      if (pre_in_valid && pre_in_ready) void'(pre_q.pop_front());
      if (pre_in_valid && !pre_in_ready) cnt_stall++;
      if (rr_both) cnt_rr++;
      if (post_out_valid) post_q.push_back('{p: post_out_phv, t: cycle + POST_LAT});
      if (post_in_valid) void'(post_q.pop_front());
      if (sch_valid) check_out();
    end
  end

  always @(negedge clk) begin
    pre_in_valid = (pre_q.size() > 0) && (pre_q[0].t <= cycle);
    pre_in_phv   = (pre_q.size() > 0) ? pre_q[0].p : '0;
    post_in_valid = (post_q.size() > 0) && (post_q[0].t <= cycle);
    post_in_phv   = (post_q.size() > 0) ? post_q[0].p : '0;
  end

  task automatic check_out();
    int id, lat;
    id = int'(sch_phv.hdr[31:0]);
    n_out++;
    checks++;
    if (!t_in.exists(id)) begin
      failures++; $display("FAIL unknown or duplicate packet %0d", id);
      return;
    end
    lat = cycle - t_in[id];
    t_in.delete(id);
    if (sch_body != body_t'(id)) begin
      failures++; $display("FAIL packet %0d got body %0d", id, sch_body);
    end
    if (id % 3 != 0) begin
      cnt_ml++;
      if (lat < min_ml_lat) min_ml_lat = lat;
      if (id > max_ml_id_out) max_ml_id_out = id;
      if (!sch_phv.ml || int'(sch_phv.fields[0]) != exp_val[id]) begin
        failures++;
        $display("FAIL ML packet %0d ml=%0b out=%0d exp=%0d", id, sch_phv.ml, sch_phv.fields[0], exp_val[id]);
      end
    end else begin
      cnt_byp++;
      if (lat < min_byp_lat) min_byp_lat = lat;
      // an earlier ML packet still inside means this bypass packet overtook it
      foreach (t_in[k]) if (k < id && k % 3 != 0) begin cnt_overtake++; break; end
      if (sch_phv.ml || sch_phv.fields != sent_fields[id]) begin
        failures++; $display("FAIL bypass packet %0d altered", id);
      end
    end
  endtask

  task automatic write_cfg(input int tile, input logic [CFG_WORDS*32-1:0] bits);
    for (int wd = 0; wd < CFG_WORDS; wd++) begin
      cfg_we = 1; cfg_tile = SRC_W'(tile); cfg_word = CFG_WORD_W'(wd); cfg_wdata = bits[32*wd +: 32];
      @(negedge clk);
    end
    cfg_we = 0;
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    par_valid = 0; par_phv = '0; par_body = '0;
    cfg_we = 0; cfg_tile = '0; cfg_word = '0; cfg_wdata = '0;
    wt_we = 0; wt_tile = '0; wt_bank = '0; wt_addr = '0; wt_data = '0;
    alloc_we = 0;
    for (int q = 0; q < 3; q++) alloc_size[q] = '0;
    m = new(ROWS, COLS, '{6, 12, 6, 3, 1});
    m.randomize_model(12, 16);
    checks++;
    if (m.place() == 0) begin failures++; $display("FAIL DNN does not fit the grid"); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (m.cfg[t]) write_cfg(t, (CFG_WORDS*32)'(m.cfg[t]));
    write_cfg(NT, (CFG_WORDS*32)'(m.ocfg));
    foreach (m.writes[i]) begin
      wt_we = 1; wt_tile = SRC_W'(m.writes[i].tile); wt_bank = BANK_W'(m.writes[i].bank);
      wt_addr = MU_AW'(m.writes[i].addr); wt_data = data_t'(m.writes[i].data);
      @(negedge clk);
    end
    wt_we = 0;
    @(negedge clk);
    traffic_on = 1;
    while (n_out < NPKT) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (n_out != NPKT || t_in.num() != 0) begin
      failures++; $display("FAIL %0d of %0d packets delivered", n_out, NPKT);
    end
    checks++;
    if (min_byp_lat >= min_ml_lat) begin
      failures++; $display("FAIL bypass latency %0d not below ML latency %0d", min_byp_lat, min_ml_lat);
    end
    $display("packets %0d: ML %0d, bypass %0d, overtakes %0d, RR contention %0d, credit stalls %0d, parser back-pressure %0d",
             n_out, cnt_ml, cnt_byp, cnt_overtake, cnt_rr, cnt_stall, cnt_bp);
    $display("min ML latency %0d cycles, min bypass latency %0d cycles (DNN block latency %0d)",
             min_ml_lat, min_byp_lat, m.latency);
    begin
      int cnt[6];
      string nm[6];
      cnt = '{cnt_ml, cnt_byp, cnt_overtake, cnt_rr, cnt_stall, cnt_bp};
      nm  = '{"ML path", "bypass", "overtake", "RR contention", "credit stall", "parser back-pressure"};
      for (int i = 0; i < 6; i++) if (REQUIRE[i]) begin
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism never happened: %s", nm[i]); end
      end
    end
    done = 1;
  end
endmodule
