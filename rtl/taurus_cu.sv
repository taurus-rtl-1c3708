// taurus_cu -- Taurus compute unit (CU): LANES x STAGES pipelined SIMD FUs.
//
// A CU takes a vector on port A (data, e.g. packet features) and a vector on
// port B (e.g. a weight vector read from an MU) and passes A through STAGES
// configurable stages (taurus_cu_stage). Each stage is a map, a reduce or a
// bypass; the stage configuration is static, written before traffic runs.
// Example: a 16-input perceptron with ReLU is
//   stage0 MAP MUL (A x B)   stage1 REDUCE ADD   stage2 MAP ADD imm=bias
//   stage3 MAP RELU
// which takes 1 + 4 + 1 + 1 = 7 cycles and accepts one vector per cycle.
//
// Interface: in_valid/a/b in, out_valid/y out, no back-pressure (the MapReduce
// block is a fixed-latency pipeline). Latency = sum over stages of 1 (map,
// bypass) or log2(LANES) (reduce).
//
// Follows the published design: 16 lanes, four stages, 8-bit fixed point,
// pipeline registers between stages so every FU is busy every cycle, a
// map-then-reduce taking five cycles in a 16-lane CU. This design's own
// choices: the two-port operand model and the configuration format.
module taurus_cu
  import taurus_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  stage_cfg_t [STAGES-1:0] cfg,
  input  logic                    in_valid,
  input  vec_t                    a,
  input  vec_t                    b,
  output logic                    out_valid,
  output vec_t                    y
);

  logic v [STAGES+1];
  vec_t d [STAGES+1];
  vec_t w [STAGES+1];

  assign v[0] = in_valid;
  assign d[0] = a;
  assign w[0] = b;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    taurus_cu_stage u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg      (cfg[s]),
      .in_valid (v[s]),
      .x        (d[s]),
      .b        (w[s]),
      .out_valid(v[s+1]),
      .y        (d[s+1]),
      .b_out    (w[s+1])
    );
  end

  assign out_valid = v[STAGES];
  assign y         = d[STAGES];

endmodule
