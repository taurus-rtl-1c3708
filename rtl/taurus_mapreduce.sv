// taurus_mapreduce -- the Taurus MapReduce block: a ROWS x COLS grid of compute
// units (CUs) and memory units (MUs) joined by a static interconnect.
//
// Layout: tile t = r*COLS + c. A tile is an MU when both r and c are even and a
// CU otherwise, which gives the 3:1 CU:MU checkerboard (rows alternate
// "MU CU MU CU ..." and "CU CU CU ..."); the default 10 x 12 grid has 90 CUs
// and 30 MUs.
//
// Dataflow: the PHV feature field enters as a LANES-wide vector (feat_valid,
// feat). Every CU has two interconnect input ports (A: data, B: operand/weights)
// and every MU one (A: lookup addresses); each port statically picks, per lane,
// a lane of any tile output or of the feature field (taurus_xbar_port). A
// further interconnect port forms the PHV output field (out_valid, out). The
// whole block is a fixed-latency pipeline with no back-pressure: one packet
// per cycle in, one result per cycle out, as configured.
//
// Configuration (out of band, before traffic): tile t's configuration is a
// taurus_pkg::tile_cfg_t, written 32 bits at a time: cfg_we, cfg_tile = t,
// cfg_word = w writes bits [32w+31:32w]. cfg_tile = ROWS*COLS addresses the
// output port's port_cfg_t the same way. Weights and lookup tables are written
// through the wt_* port, one byte per cycle (tile, bank, entry).
// Reset puts every port on SRC_ZERO (never valid) and every MU off.
//
// Follows the published design: CU/MU checkerboard in a 12 x 10 grid with a
// 3:1 CU:MU ratio, features in and output out through the PHV, weights in
// on-chip MUs, static pipelined interconnect. This design's own choices: the
// orientation (10 rows of 12), the crossbar-style interconnect, the
// configuration and weight-write ports.
//
// Lint notes: an MU tile leaves the port_b and stage fields of its
// configuration word unused, and a CU tile the mu field; the registers are
// uniform so that any tile is written the same way (synthesis drops the unused
// bits). The reset-only use of rst_n in assertions' `disable iff` is reported
// as a mixed synchronous/asynchronous net; it is the asynchronous reset.
module taurus_mapreduce
  import taurus_pkg::*;
#(
  parameter int unsigned ROWS = 10,
  parameter int unsigned COLS = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration write
  input  logic              cfg_we,
  input  logic [SRC_W-1:0]  cfg_tile,
  input  logic [CFG_WORD_W-1:0] cfg_word,
  input  logic [31:0]       cfg_wdata,
  // weight / table write
  input  logic              wt_we,
  input  logic [SRC_W-1:0]  wt_tile,
  input  logic [BANK_W-1:0] wt_bank,
  input  logic [MU_AW-1:0]  wt_addr,
  input  data_t             wt_data,
  // PHV feature field in, model output field out
  input  logic              feat_valid,
  input  vec_t              feat,
  output logic              out_valid,
  output vec_t              out
);

  localparam int unsigned NT     = ROWS * COLS;
  localparam int unsigned CFG_BW = CFG_WORDS * 32;
  localparam int unsigned PORT_W = $bits(port_cfg_t);

  initial begin
    assert (NT < 32'(SRC_ZERO)) else $fatal(1, "grid too large for SRC_W");
  end

  // Reset value of a port: never valid, all lanes zero.
  function automatic port_cfg_t port_off();
    port_cfg_t p;
    for (int l = 0; l < LANES; l++) begin
      p.src[l]  = SRC_ZERO;
      p.lane[l] = '0;
    end
    p.vsrc  = SRC_ZERO;
    p.delay = '0;
    return p;
  endfunction

  function automatic logic [CFG_BW-1:0] tile_reset();
    tile_cfg_t t;
    t.port_a = port_off();
    t.port_b = port_off();
    for (int s = 0; s < STAGES; s++)
      t.stage[s] = '{mode: ST_BYPASS, op: OP_PASS, bsel: B_PORT, shift: '0, imm: '0};
    t.mu = '{mode: MU_OFF, base: '0};
    return CFG_BW'(t);
  endfunction

  // ---------------- configuration registers ----------------
  logic [CFG_BW-1:0] cfg_bits [NT+1];   // entry NT: output port

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NT; t++) cfg_bits[t] <= tile_reset();
      cfg_bits[NT] <= CFG_BW'(port_off());
    end else if (cfg_we && cfg_tile <= SRC_W'(NT) && cfg_word < CFG_WORD_W'(CFG_WORDS)) begin
      cfg_bits[cfg_tile][32*cfg_word +: 32] <= cfg_wdata;
    end
  end

  // ---------------- tiles ----------------
  vec_t  tile_vec   [NT];
  logic  tile_valid [NT];
  data_t tile_lane  [NT*LANES];   // the same outputs, one entry per lane

  for (genvar t = 0; t < NT; t++) begin : g_flat
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      assign tile_lane[t*LANES + l] = tile_vec[t][l];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned T = r * COLS + c;
      tile_cfg_t tcfg;
      logic      a_valid;
      vec_t      a_vec;

      assign tcfg = tile_cfg_t'(cfg_bits[T][TILE_CFG_W-1:0]);

      taurus_xbar_port #(.NSRC(NT)) u_port_a (
        .clk, .rst_n, .cfg(tcfg.port_a),
        .src_lane(tile_lane), .src_valid(tile_valid),
        .feat, .feat_valid,
        .out_valid(a_valid), .y(a_vec)
      );

      if ((r % 2 == 0) && (c % 2 == 0)) begin : g_mu
        taurus_mu u_mu (
          .clk, .rst_n, .cfg(tcfg.mu),
          .in_valid(a_valid), .a(a_vec),
          .wr_en  (wt_we && wt_tile == SRC_W'(T)),
          .wr_bank(wt_bank), .wr_addr(wt_addr), .wr_data(wt_data),
          .out_valid(tile_valid[T]), .y(tile_vec[T])
        );
      end else begin : g_cu
        logic b_valid_unused;
        vec_t b_vec;
        taurus_xbar_port #(.NSRC(NT)) u_port_b (
          .clk, .rst_n, .cfg(tcfg.port_b),
          .src_lane(tile_lane), .src_valid(tile_valid),
          .feat, .feat_valid,
          .out_valid(b_valid_unused), .y(b_vec)
        );
        taurus_cu u_cu (
          .clk, .rst_n, .cfg(tcfg.stage),
          .in_valid(a_valid), .a(a_vec), .b(b_vec),
          .out_valid(tile_valid[T]), .y(tile_vec[T])
        );
      end
    end
  end

  // ---------------- PHV output field ----------------
  port_cfg_t ocfg;
  assign ocfg = port_cfg_t'(cfg_bits[NT][PORT_W-1:0]);

  taurus_xbar_port #(.NSRC(NT)) u_port_out (
    .clk, .rst_n, .cfg(ocfg),
    .src_lane(tile_lane), .src_valid(tile_valid),
    .feat, .feat_valid,
    .out_valid, .y(out)
  );

endmodule
