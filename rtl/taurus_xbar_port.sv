// taurus_xbar_port -- one input port of the MapReduce block's static interconnect.
//
// Every input port of a grid tile (and the block's PHV output field) owns one
// of these. Each of its LANES lanes is statically wired, by configuration, to
// one lane of one source: any tile's output vector, the PHV feature field
// (SRC_FEAT) or a constant zero (SRC_ZERO, which as a valid source is never
// valid, marking an unused port). Per-lane selection lets a port
// gather the scalar results of several CUs (one neuron each) into the vector
// the next layer needs, or pass a whole vector through unchanged.
//
// The tile outputs arrive as one flat array of lanes (tile t, lane l at index
// t*LANES + l), so each output lane is a single mux over all tile lanes.
//
// Valid: the port is valid when the source named by cfg.vsrc is valid.
// Timing: the selected vector is registered (one interconnect pipeline stage)
// and then delayed by cfg.delay further cycles (0..2^DLY_W-1), so that the
// compiler can balance paths of different depth into one consumer. Total
// latency = 1 + cfg.delay cycles.
//
// Follows the published design: a static (configured, not arbitrated)
// interconnect that is pipelined. This design's own choice: the published
// description draws switch boxes between tiles but does not describe them;
// this port is a lane-granular static crossbar over all tiles, with
// configurable delay for path balancing.
module taurus_xbar_port
  import taurus_pkg::*;
#(
  parameter int unsigned NSRC = 120     // number of grid tiles
) (
  input  logic       clk,
  input  logic       rst_n,
  input  port_cfg_t  cfg,
  input  data_t      src_lane  [NSRC*LANES],  // lane l of tile t at t*LANES+l
  input  logic       src_valid [NSRC],
  input  vec_t       feat,
  input  logic       feat_valid,
  output logic       out_valid,
  output vec_t       y
);

  localparam int unsigned DMAX = 1 << DLY_W;
  localparam int unsigned IW   = (NSRC > 1) ? $clog2(NSRC) : 1;

  vec_t sel_vec;
  logic sel_valid;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      if (cfg.src[l] == SRC_FEAT)         sel_vec[l] = feat[cfg.lane[l]];
      else if (cfg.src[l] < SRC_W'(NSRC)) sel_vec[l] = src_lane[{IW'(cfg.src[l]), cfg.lane[l]}];
      else                                sel_vec[l] = '0;   // SRC_ZERO or unused id
    end
    if (cfg.vsrc == SRC_FEAT)          sel_valid = feat_valid;
    else if (cfg.vsrc < SRC_W'(NSRC))  sel_valid = src_valid[IW'(cfg.vsrc)];
    else                               sel_valid = 1'b0;
  end

  vec_t dly_vec   [DMAX];
  logic dly_valid [DMAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DMAX; i++) dly_valid[i] <= 1'b0;
    end else begin
      dly_valid[0] <= sel_valid;
      for (int i = 1; i < DMAX; i++) dly_valid[i] <= dly_valid[i-1];
    end
  end

  always_ff @(posedge clk) begin
    dly_vec[0] <= sel_vec;
    for (int i = 1; i < DMAX; i++) dly_vec[i] <= dly_vec[i-1];
  end

  assign out_valid = dly_valid[cfg.delay];
  assign y         = dly_vec[cfg.delay];

endmodule
