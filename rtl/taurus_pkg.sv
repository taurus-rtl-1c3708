// taurus_pkg -- shared types and constants of the Taurus MapReduce data plane.
//
// The MapReduce block is a grid of compute units (CUs) and memory units (MUs)
// joined by a static interconnect. The numbers that the published design fixes
// live here: an 8-bit fixed-point datapath, 16 SIMD lanes per CU, 4 pipelined
// stages per CU, 16 SRAM banks of 1024 entries per MU. They are package
// constants because the configuration structs below are sized by them.
//
// Everything else in this package (operation encodings, the layout of the
// configuration words, the special interconnect source codes) is this design's
// own choice; the published description does not give an instruction format.
package taurus_pkg;

  // ---- sizes fixed by the published configuration -------------------------
  localparam int unsigned DW        = 8;     // fixed-point data width (fix8)
  localparam int unsigned LANES     = 16;    // SIMD lanes per CU
  localparam int unsigned STAGES    = 4;     // pipelined compute stages per CU
  localparam int unsigned MU_BANKS  = 16;    // SRAM banks per MU
  localparam int unsigned MU_DEPTH  = 1024;  // entries per bank

  // ---- derived / design choices -------------------------------------------
  localparam int unsigned LANE_W    = $clog2(LANES);       // 4
  localparam int unsigned RED_LVLS  = $clog2(LANES);       // reduction tree depth (4)
  localparam int unsigned MU_AW     = $clog2(MU_DEPTH);    // 10
  localparam int unsigned BANK_W    = $clog2(MU_BANKS);    // 4
  localparam int unsigned SRC_W     = 8;                   // interconnect source id
  localparam int unsigned DLY_W     = 3;                   // per-port balancing delay
  localparam int unsigned SH_W      = 3;                   // fixed-point shift field

  // Interconnect source ids: 0 .. NUNITS-1 name a grid tile; these two are special.
  localparam logic [SRC_W-1:0] SRC_FEAT = 8'hFF;  // PHV feature field
  localparam logic [SRC_W-1:0] SRC_ZERO = 8'hFE;  // constant zero; never valid

  typedef logic signed [DW-1:0] data_t;
  typedef data_t [LANES-1:0]     vec_t;

  // Functional-unit operations. Map uses all of them; reduce uses the
  // associative ones (ADD, MUL, MAX, MIN).
  typedef enum logic [3:0] {
    OP_PASS  = 4'd0,   // a
    OP_ADD   = 4'd1,   // sat(a + b)
    OP_SUB   = 4'd2,   // sat(a - b)
    OP_MUL   = 4'd3,   // sat((a * b) >>> shift)
    OP_MAX   = 4'd4,   // max(a, b)
    OP_MIN   = 4'd5,   // min(a, b)
    OP_RELU  = 4'd6,   // max(a, 0)
    OP_LRELU = 4'd7,   // a < 0 ? a >>> shift : a
    OP_SHR   = 4'd8,   // a >>> shift
    OP_PASSB = 4'd9    // b
  } fu_op_e;

  typedef enum logic [1:0] {
    ST_MAP    = 2'd0,  // element-wise op, 1 cycle
    ST_REDUCE = 2'd1,  // tree reduction over all lanes, RED_LVLS cycles
    ST_BYPASS = 2'd2   // stage unused: data forwarded through its register
  } stage_mode_e;

  // Second operand of a map stage.
  typedef enum logic [1:0] {
    B_PORT = 2'd0,     // lane of the CU's B input (weights from an MU)
    B_IMM  = 2'd1,     // the stage's immediate (e.g. a bias)
    B_SELF = 2'd2      // the first operand itself (squares: a*a)
  } bsel_e;

  typedef struct packed {
    stage_mode_e       mode;
    fu_op_e            op;
    bsel_e             bsel;
    logic [SH_W-1:0]   shift;
    data_t             imm;
  } stage_cfg_t;

  // One interconnect input port: each lane picks (source, lane) statically.
  typedef struct packed {
    logic [LANES-1:0][SRC_W-1:0]  src;     // source tile per lane
    logic [LANES-1:0][LANE_W-1:0] lane;    // source lane per lane
    logic [SRC_W-1:0]             vsrc;    // whose valid qualifies the port
    logic [DLY_W-1:0]             delay;   // extra cycles of balancing delay
  } port_cfg_t;

  typedef enum logic [1:0] {
    MU_VEC  = 2'd0,    // all banks read at `base`: one weight vector, always valid
    MU_LUT  = 2'd1,    // bank l reads base + unsigned(A[l]): per-lane lookup table
    MU_OFF  = 2'd2     // unit unused
  } mu_mode_e;

  typedef struct packed {
    mu_mode_e          mode;
    logic [MU_AW-1:0]  base;
  } mu_cfg_t;

  // Configuration of one grid tile (a CU uses port_a, port_b and stage;
  // an MU uses port_a as its address input and mu).
  typedef struct packed {
    port_cfg_t                      port_a;
    port_cfg_t                      port_b;
    stage_cfg_t [STAGES-1:0]        stage;
    mu_cfg_t                        mu;
  } tile_cfg_t;

  localparam int unsigned TILE_CFG_W  = $bits(tile_cfg_t);
  localparam int unsigned CFG_WORDS   = (TILE_CFG_W + 31) / 32;
  localparam int unsigned CFG_WORD_W  = $clog2(CFG_WORDS + 1);


  // ---- PHV as seen by the MapReduce section of the pipeline ----------------
  // `fields` carries the dense feature vector on the way in and the model's
  // output vector on the way out; `hdr` holds every other header bit.
  localparam int unsigned HDR_W  = 128;   // non-feature PHV bits (assumed)
  localparam int unsigned BODY_W = 16;    // packet-body descriptor (assumed)

  typedef logic [BODY_W-1:0] body_t;

  typedef struct packed {
    logic              ml;      // set by a preprocessing MAT: needs inference
    logic [HDR_W-1:0]  hdr;
    vec_t              fields;
  } phv_t;

  // Saturate a wide signed value to the fixed-point range.
  function automatic data_t sat(input logic signed [2*DW+1:0] v);
    if (v > 127)       return data_t'(8'sd127);
    else if (v < -128) return data_t'(-8'sd128);
    else               return data_t'(v[DW-1:0]);
  endfunction

endpackage
