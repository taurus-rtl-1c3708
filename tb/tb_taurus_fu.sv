// tb_taurus_fu -- self-checking test of one Taurus functional unit.
// Drives every operation with random and corner-case operands and compares
// with an integer reference written here independently of the RTL.
module tb_taurus_fu;
  import taurus_pkg::*;

  fu_op_e          op;
  data_t           a, b, y;
  logic [SH_W-1:0] shift;
  int              checks = 0, failures = 0;

  taurus_fu dut (.op, .a, .b, .shift, .y);

  function automatic int clamp(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  function automatic int ref_fu(input int o, input int x, input int z, input int sh);
    case (o)
      0: return x;
      1: return clamp(x + z);
      2: return clamp(x - z);
      3: return clamp((x * z) >>> sh);
      4: return (x > z) ? x : z;
      5: return (x < z) ? x : z;
      6: return (x < 0) ? 0 : x;
      7: return (x < 0) ? (x >>> sh) : x;
      8: return x >>> sh;
      9: return z;
      default: return x;
    endcase
  endfunction

  task automatic check(input int o, input int x, input int z, input int sh);
    int exp;
    op = fu_op_e'(o); a = data_t'(x); b = data_t'(z); shift = SH_W'(sh);
    #1;
    exp = ref_fu(o, x, z, sh);
    checks++;
    if (int'(y) != exp) begin
      failures++;
      $display("FAIL op=%0d a=%0d b=%0d sh=%0d y=%0d exp=%0d", o, x, z, sh, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // corner cases: saturation both ways
    check(1, 100, 100, 0);  check(1, -100, -100, 0);
    check(2, -100, 100, 0); check(2, 100, -100, 0);
    check(3, 127, 127, 0);  check(3, -128, 127, 0); check(3, -128, -128, 7);
    check(3, 64, 64, 6);    check(7, -64, 0, 2);    check(6, -1, 0, 0);
    for (int i = 0; i < 4000; i++)
      check($urandom_range(0, 9), $signed($urandom_range(0, 255)) - 128,
            $signed($urandom_range(0, 255)) - 128, $urandom_range(0, 7));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
