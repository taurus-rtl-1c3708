// tb_taurus_cu -- self-checking test of a Taurus compute unit.
// Three configurations are streamed at one vector per cycle (with random
// gaps) and every output is checked for value and for its exact latency:
//   1. perceptron + ReLU: MUL(A,B) | REDUCE ADD | ADD bias | RELU   (7 cycles)
//   2. squared distance:  SUB(A,B) | MUL self   | REDUCE ADD | PASS  (7 cycles)
//   3. map chain:         LRELU    | MAX imm    | BYPASS     | MUL imm (4 cycles)
// The map + reduce part of configuration 1 is the CU's minimum MapReduce
// latency, 1 + log2(16) = 5 cycles; two more map stages follow.
module tb_taurus_cu;
  import taurus_pkg::*;

  logic clk = 0, rst_n = 0;
  stage_cfg_t [STAGES-1:0] cfg;
  logic in_valid, out_valid;
  vec_t a, b, y;
  int checks = 0, failures = 0, cycle = 0;

  taurus_cu dut (.clk, .rst_n, .cfg, .in_valid, .a, .b, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic int clamp(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // expected outputs: value of lane 0..15 and the cycle they must appear
  typedef struct { int t; int v[LANES]; } exp_t;
  exp_t expq[$];
  int   mode, lat;

  function automatic exp_t model(input vec_t av, input vec_t bv, input int m, input int t0);
    exp_t e;
    int acc;
    e.t = t0;
    if (m == 1) begin
      acc = 0;
      for (int l = 0; l < LANES; l++) acc = clamp(acc + clamp((int'(av[l]) * int'(bv[l])) >>> 3));
      // tree order matters for saturation; keep values small so none occurs
      acc = clamp(acc + 5);
      if (acc < 0) acc = 0;
      for (int l = 0; l < LANES; l++) e.v[l] = acc;
    end else if (m == 2) begin
      acc = 0;
      for (int l = 0; l < LANES; l++) begin
        int d;
        d = clamp(int'(av[l]) - int'(bv[l]));
        acc += clamp((d * d) >>> 4);
      end
      for (int l = 0; l < LANES; l++) e.v[l] = clamp(acc);
    end else begin
      for (int l = 0; l < LANES; l++) begin
        int x;
        x = int'(av[l]);
        x = (x < 0) ? (x >>> 2) : x;
        x = (x > -3) ? x : -3;
        x = clamp((x * 3) >>> 1);
        e.v[l] = x;
      end
    end
    return e;
  endfunction

  task automatic configure(input int m);
    mode = m;
    if (m == 1) begin
      cfg[0] = '{mode: ST_MAP,    op: OP_MUL,  bsel: B_PORT, shift: 3'd3, imm: '0};
      cfg[1] = '{mode: ST_REDUCE, op: OP_ADD,  bsel: B_PORT, shift: 3'd0, imm: '0};
      cfg[2] = '{mode: ST_MAP,    op: OP_ADD,  bsel: B_IMM,  shift: 3'd0, imm: 8'sd5};
      cfg[3] = '{mode: ST_MAP,    op: OP_RELU, bsel: B_PORT, shift: 3'd0, imm: '0};
      lat = 7;
    end else if (m == 2) begin
      cfg[0] = '{mode: ST_MAP,    op: OP_SUB,  bsel: B_PORT, shift: 3'd0, imm: '0};
      cfg[1] = '{mode: ST_MAP,    op: OP_MUL,  bsel: B_SELF, shift: 3'd4, imm: '0};
      cfg[2] = '{mode: ST_REDUCE, op: OP_ADD,  bsel: B_PORT, shift: 3'd0, imm: '0};
      cfg[3] = '{mode: ST_MAP,    op: OP_PASS, bsel: B_PORT, shift: 3'd0, imm: '0};
      lat = 7;
    end else begin
      cfg[0] = '{mode: ST_MAP,    op: OP_LRELU, bsel: B_PORT, shift: 3'd2, imm: '0};
      cfg[1] = '{mode: ST_MAP,    op: OP_MAX,   bsel: B_IMM,  shift: 3'd0, imm: -8'sd3};
      cfg[2] = '{mode: ST_BYPASS, op: OP_ADD,   bsel: B_PORT, shift: 3'd0, imm: '0};
      cfg[3] = '{mode: ST_MAP,    op: OP_MUL,   bsel: B_IMM,  shift: 3'd1, imm: 8'sd3};
      lat = 4;
    end
  endtask

  // checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected output at %0d", cycle);
      end else begin
        e = expq.pop_front();
        if (cycle != e.t) begin
          failures++; $display("FAIL latency: out at %0d expected %0d", cycle, e.t);
        end
        for (int l = 0; l < LANES; l++)
          if (int'(y[l]) != e.v[l]) begin
            failures++;
            $display("FAIL mode %0d lane %0d y=%0d exp=%0d", mode, l, y[l], e.v[l]);
            break;
          end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; a = '0; b = '0;
    configure(1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 1; m <= 3; m++) begin
      configure(m);
      @(negedge clk);
      for (int n = 0; n < 300; n++) begin
        in_valid = ($urandom_range(0, 3) != 0);
        for (int l = 0; l < LANES; l++) begin
          if (m == 1) begin
            a[l] = data_t'($signed($urandom_range(0, 15)) - 8);
            b[l] = data_t'($signed($urandom_range(0, 15)) - 8);
          end else if (m == 2) begin
            a[l] = data_t'($signed($urandom_range(0, 31)) - 16);
            b[l] = data_t'($signed($urandom_range(0, 31)) - 16);
          end else begin
            a[l] = data_t'($signed($urandom_range(0, 255)) - 128);
            b[l] = data_t'($urandom_range(0, 255));
          end
        end
        if (in_valid) expq.push_back(model(a, b, m, cycle + lat));
        @(negedge clk);
      end
      in_valid = 0;
      repeat (12) @(negedge clk);
      if (expq.size() != 0) begin
        failures++; $display("FAIL %0d outputs missing", expq.size());
        expq.delete();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
