// taurus_cu_stage -- one pipelined stage of a Taurus compute unit.
//
// A stage holds LANES functional units, each followed by a pipeline register,
// and a reduction tree. Its static configuration selects one of three modes:
//   ST_MAP     y[l] = op(x[l], b'[l])              latency 1 cycle
//   ST_REDUCE  y[l] = op-reduction of x[0..LANES-1] latency log2(LANES) cycles
//   ST_BYPASS  y[l] = x[l]                          latency 1 cycle
// where b' is the B-port lane, the stage immediate or x[l] itself (cfg.bsel).
// The reduction is a binary tree with one register level per tree level; level
// k uses LANES/2^(k+1) FUs, i.e. a shrinking fraction of the stage each cycle,
// so a 16-lane reduction takes four cycles and still accepts a new vector every
// cycle. The reduced scalar is broadcast to all output lanes so that following
// map stages (bias, activation) can use any lane.
//
// The B vector travels with the data (same latency) so a later stage sees the
// B value that arrived with its packet.
//
// Follows the published design: lanes x stages of FUs with pipeline registers,
// all lanes executing the same instruction, a 16-lane reduce in four cycles.
// This design's own choices: reduction within a single stage (the published
// three-stage figure spreads its reduction across stages), broadcast of the
// result, and the bypass mode.
module taurus_cu_stage
  import taurus_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  stage_cfg_t  cfg,
  input  logic        in_valid,
  input  vec_t        x,
  input  vec_t        b,
  output logic        out_valid,
  output vec_t        y,
  output vec_t        b_out
);

  // ---------------- map / bypass path: 1 cycle ----------------
  vec_t   map_y_c, map_y_q, map_b_q;
  logic   map_v_q;
  fu_op_e map_op;

  assign map_op = (cfg.mode == ST_MAP) ? cfg.op : OP_PASS;

  for (genvar l = 0; l < LANES; l++) begin : g_map
    data_t opb;
    always_comb begin
      unique case (cfg.bsel)
        B_PORT:  opb = b[l];
        B_IMM:   opb = cfg.imm;
        B_SELF:  opb = x[l];
        default: opb = b[l];
      endcase
    end
    taurus_fu u_fu (.op(map_op), .a(x[l]), .b(opb), .shift(cfg.shift), .y(map_y_c[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) map_v_q <= 1'b0;
    else        map_v_q <= in_valid;
  end
  always_ff @(posedge clk) begin
    map_y_q <= map_y_c;
    map_b_q <= b;
  end

  // ---------------- reduce path: RED_LVLS cycles ----------------
  // lvl[k] holds the partial results after k tree levels (lvl[0] = input).
  vec_t lvl [RED_LVLS+1];
  vec_t red_b [RED_LVLS+1];
  logic red_v [RED_LVLS+1];

  assign lvl[0]   = x;
  assign red_b[0] = b;
  assign red_v[0] = in_valid;

  for (genvar k = 0; k < RED_LVLS; k++) begin : g_lvl
    localparam int unsigned N = LANES >> (k + 1);   // FUs used at this level
    vec_t nxt;
    for (genvar i = 0; i < LANES; i++) begin : g_node
      if (i < N) begin : g_fu
        taurus_fu u_fu (.op(cfg.op), .a(lvl[k][2*i]), .b(lvl[k][2*i+1]),
                        .shift(cfg.shift), .y(nxt[i]));
      end else begin : g_idle
        assign nxt[i] = '0;
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) red_v[k+1] <= 1'b0;
      else        red_v[k+1] <= red_v[k];
    end
    always_ff @(posedge clk) begin
      lvl[k+1]   <= nxt;
      red_b[k+1] <= red_b[k];
    end
  end

  // ---------------- output select ----------------
  always_comb begin
    if (cfg.mode == ST_REDUCE) begin
      out_valid = red_v[RED_LVLS];
      y         = {LANES{lvl[RED_LVLS][0]}};
      b_out     = red_b[RED_LVLS];
    end else begin
      out_valid = map_v_q;
      y         = map_y_q;
      b_out     = map_b_q;
    end
  end

endmodule
