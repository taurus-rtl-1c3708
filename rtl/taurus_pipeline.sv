// taurus_pipeline -- the Taurus data-plane section between the packet parser
// and the scheduler: ML/non-ML split, MapReduce block, header and body bypass,
// round-robin merge, and the three packet sub-queues.
//
// Packet flow (one PHV per cycle at most):
//  1. Parser -> (par_*): the PHV goes out to the preprocessing MATs (pre_out_*),
//     the body descriptor waits in sub-queue q0.
//  2. Preprocessing MATs -> (pre_in_*): the returned PHV carries the `ml` flag.
//     ML packet:   fields (features) enter the MapReduce block; the other
//                  headers enter the header FIFO; the body moves to q1.
//     Non-ML:      PHV and body enter the bypass FIFO (header and body bypass)
//                  and never see the MapReduce latency.
//  3. The MapReduce block is a fixed-latency pipeline: its output vector is
//     pushed into the result FIFO in packet order, so the heads of the result
//     FIFO, header FIFO and q1 always belong to the same packet.
//  4. A round-robin selector picks the ML path (result+header+q1 body) or the
//     bypass path for the single slot into the postprocessing MATs (post_out_*);
//     the body moves to q2. Results replace the feature field in the PHV.
//  5. Postprocessing MATs -> (post_in_*): the PHV is paired with the head of q2
//     and handed to the scheduler (sch_*).
//
// The MapReduce block cannot stall, so ML packets are admitted against a
// credit count: at most ML_INFLIGHT ML packets may be between admission and
// the RR grant, which is the depth of the header and result FIFOs. When
// the head packet's path is full (no credit for an ML packet, no bypass FIFO
// space for a non-ML one) pre_in_ready drops; when q0 is full par_ready drops
// (back-pressure toward the preprocessing stages and the parser). A non-ML
// packet never waits for ML credits unless an ML packet is ahead of it. The MAT stages,
// parser and scheduler are outside this module; their PHVs are ports.
// The postprocessing MATs and scheduler must accept what they are given.
//
// Follows the published design: ML decision carried as PHV metadata from a
// preprocessing MAT, only the dense feature field enters MapReduce while other
// headers go through a FIFO, non-ML packets bypass MapReduce (headers and body),
// an RR selector into the postprocessing MAT, and a packet queue split into
// three sub-queues by pipeline depth. This design's own choices: the credit
// scheme, FIFO depths, PHV widths and the ready/valid handshakes.
module taurus_pipeline
  import taurus_pkg::*;
#(
  parameter int unsigned ROWS        = 10,
  parameter int unsigned COLS        = 12,
  parameter int unsigned ML_INFLIGHT = 256,   // header/result FIFO depth
  parameter int unsigned BYP_DEPTH   = 16,    // bypass FIFO depth
  parameter int unsigned Q_TOTAL     = 512,   // packet buffer entries
  parameter int unsigned Q_PRE       = 128,
  parameter int unsigned Q_MR        = 256,
  parameter int unsigned Q_POST      = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  // parser -> pipeline
  input  logic              par_valid,
  output logic              par_ready,
  input  phv_t              par_phv,
  input  body_t             par_body,
  // pipeline <-> preprocessing MATs
  output logic              pre_out_valid,
  output phv_t              pre_out_phv,
  input  logic              pre_in_valid,
  output logic              pre_in_ready,
  input  phv_t              pre_in_phv,
  // pipeline <-> postprocessing MATs
  output logic              post_out_valid,
  output phv_t              post_out_phv,
  input  logic              post_in_valid,
  input  phv_t              post_in_phv,
  // pipeline -> scheduler
  output logic              sch_valid,
  output phv_t              sch_phv,
  output body_t             sch_body,
  // out-of-band configuration and weights of the MapReduce block
  input  logic              cfg_we,
  input  logic [SRC_W-1:0]  cfg_tile,
  input  logic [CFG_WORD_W-1:0] cfg_word,
  input  logic [31:0]       cfg_wdata,
  input  logic              wt_we,
  input  logic [SRC_W-1:0]  wt_tile,
  input  logic [BANK_W-1:0] wt_bank,
  input  logic [MU_AW-1:0]  wt_addr,
  input  data_t             wt_data,
  // packet-buffer partition reload (only while the pipeline is empty)
  input  logic              alloc_we,
  input  logic [$clog2(Q_TOTAL+1)-1:0] alloc_size [3]
);

  localparam int unsigned HW  = HDR_W;
  localparam int unsigned BW  = $bits(phv_t) + BODY_W;
  localparam int unsigned CRW = $clog2(ML_INFLIGHT + 1);

  // ---------------- packet sub-queues ----------------
  logic [2:0]  q_push, q_pop, q_full, q_empty;
  body_t       q_din  [3];
  body_t       q_dout [3];

  taurus_pkt_buffer #(.W(BODY_W), .TOTAL(Q_TOTAL), .Q0(Q_PRE), .Q1(Q_MR), .Q2(Q_POST)) u_pktq (
    .clk, .rst_n, .alloc_we, .alloc_size,
    .push(q_push), .din(q_din), .pop(q_pop), .dout(q_dout),
    .full(q_full), .empty(q_empty)
  );

  // ---------------- 1. parser -> preprocessing ----------------
  logic par_fire;
  assign par_ready     = !q_full[0];
  assign par_fire      = par_valid && par_ready;
  assign pre_out_valid = par_fire;
  assign pre_out_phv   = par_phv;
  assign q_push[0]     = par_fire;
  assign q_din[0]      = par_body;

  // ---------------- 2. ML / non-ML split ----------------
  logic [CRW-1:0] inflight;
  logic           ml_ok, byp_ok, byp_full;
  logic           ml_fire, byp_fire, pre_fire;
  logic           hdr_full_unused, res_full_unused;

  assign ml_ok        = (inflight < CRW'(ML_INFLIGHT)) && !q_full[1];
  assign byp_ok       = !byp_full;
  // ready depends only on the path the head packet takes
  assign pre_in_ready = pre_in_phv.ml ? ml_ok : byp_ok;
  assign pre_fire     = pre_in_valid && pre_in_ready;
  assign ml_fire      = pre_fire &&  pre_in_phv.ml;
  assign byp_fire     = pre_fire && !pre_in_phv.ml;
  assign q_pop[0]     = pre_fire;
  assign q_push[1]    = ml_fire;
  assign q_din[1]     = q_dout[0];

  // MapReduce block: features in, model output out
  logic mr_out_valid;
  vec_t mr_out;

  taurus_mapreduce #(.ROWS(ROWS), .COLS(COLS)) u_mr (
    .clk, .rst_n,
    .cfg_we, .cfg_tile, .cfg_word, .cfg_wdata,
    .wt_we, .wt_tile, .wt_bank, .wt_addr, .wt_data,
    .feat_valid(ml_fire), .feat(pre_in_phv.fields),
    .out_valid(mr_out_valid), .out(mr_out)
  );

  // non-feature headers skip MapReduce through the header FIFO
  logic [HW-1:0] hdr_dout;
  logic          hdr_empty;
  logic          ml_grant, byp_grant;
  logic [$clog2(ML_INFLIGHT+1)-1:0] hdr_count_unused, res_count_unused;

  taurus_fifo #(.W(HW), .DEPTH(ML_INFLIGHT)) u_hdr_fifo (
    .clk, .rst_n, .push(ml_fire), .din(pre_in_phv.hdr), .pop(ml_grant),
    .dout(hdr_dout), .full(hdr_full_unused), .empty(hdr_empty), .count(hdr_count_unused)
  );

  // finished MapReduce results wait here for the RR selector
  vec_t res_dout;
  logic res_empty;

  taurus_fifo #(.W($bits(vec_t)), .DEPTH(ML_INFLIGHT)) u_res_fifo (
    .clk, .rst_n, .push(mr_out_valid), .din(mr_out), .pop(ml_grant),
    .dout(res_dout), .full(res_full_unused), .empty(res_empty), .count(res_count_unused)
  );

  // non-ML packets: header bypass + body bypass
  logic [BW-1:0] byp_dout;
  logic          byp_empty;
  logic [$clog2(BYP_DEPTH+1)-1:0] byp_count_unused;
  phv_t          byp_phv;
  body_t         byp_body;

  taurus_fifo #(.W(BW), .DEPTH(BYP_DEPTH)) u_byp_fifo (
    .clk, .rst_n, .push(byp_fire), .din({pre_in_phv, q_dout[0]}), .pop(byp_grant),
    .dout(byp_dout), .full(byp_full), .empty(byp_empty), .count(byp_count_unused)
  );
  assign {byp_phv, byp_body} = byp_dout;

  // ML credits: admitted and not yet granted into the postprocessing MATs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + CRW'(ml_fire) - CRW'(ml_grant);
  end

  // ---------------- 4. round-robin merge ----------------
  logic [1:0] rr_req, rr_grant;
  assign rr_req    = {!byp_empty, !res_empty};
  assign ml_grant  = rr_grant[0];
  assign byp_grant = rr_grant[1];

  taurus_rr_arbiter #(.N(2)) u_rr (
    .clk, .rst_n, .en(!q_full[2]), .req(rr_req), .grant(rr_grant)
  );

  assign q_pop[1]       = ml_grant;
  assign post_out_valid = ml_grant || byp_grant;
  assign q_push[2]      = post_out_valid;
  assign q_din[2]       = ml_grant ? q_dout[1] : byp_body;

  always_comb begin
    if (ml_grant) begin
      post_out_phv.ml     = 1'b1;
      post_out_phv.hdr    = hdr_dout;
      post_out_phv.fields = res_dout;
    end else begin
      post_out_phv        = byp_phv;
    end
  end

  // ---------------- 5. postprocessing -> scheduler ----------------
  assign q_pop[2]  = post_in_valid;
  assign sch_valid = post_in_valid;
  assign sch_phv   = post_in_phv;
  assign sch_body  = q_dout[2];

  // ---------------- protocol checks ----------------
  a_ml_order: assert property (@(posedge clk) disable iff (!rst_n)
                 ml_grant |-> !hdr_empty && !q_empty[1]);
  a_post_in:  assert property (@(posedge clk) disable iff (!rst_n)
                 post_in_valid |-> !q_empty[2]);
  a_pre_in:   assert property (@(posedge clk) disable iff (!rst_n)
                 pre_in_valid |-> !q_empty[0]);

endmodule
