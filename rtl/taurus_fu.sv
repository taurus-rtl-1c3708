// taurus_fu -- one functional unit (FU) of a Taurus compute unit.
//
// An FU applies one 8-bit fixed-point operation to two operands. Every lane and
// every reduction-tree node of a CU is one FU; the pipeline register (PR) that
// follows each FU is in taurus_cu, so this module is purely combinational.
//
// Arithmetic: two's-complement int8. ADD, SUB and MUL saturate to [-128, 127].
// MUL keeps fixed-point scaling by an arithmetic right shift of the 16-bit
// product by `shift` (0..7) before saturating, so operands with F fractional
// bits multiply to a result with F fractional bits when shift = F.
//
// Follows the published design: 8-bit fixed-point FUs, map operations
// (add, multiply, non-linear) and associative reduce operations. This design's
// own choices: the operation set and encoding (taurus_pkg::fu_op_e),
// saturation, and the shift-based fixed-point scaling.
module taurus_fu
  import taurus_pkg::*;
(
  input  fu_op_e          op,
  input  data_t           a,
  input  data_t           b,
  input  logic [SH_W-1:0] shift,
  output data_t           y
);

  logic signed [2*DW+1:0] wa, wb, prod, shifted;

  always_comb begin
    wa      = (2*DW+2)'(a);
    wb      = (2*DW+2)'(b);
    prod    = wa * wb;
    shifted = prod >>> shift;
    unique case (op)
      OP_PASS:  y = a;
      OP_ADD:   y = sat(wa + wb);
      OP_SUB:   y = sat(wa - wb);
      OP_MUL:   y = sat(shifted);
      OP_MAX:   y = (a > b) ? a : b;
      OP_MIN:   y = (a < b) ? a : b;
      OP_RELU:  y = (a < 0) ? '0 : a;
      OP_LRELU: y = (a < 0) ? data_t'(a >>> shift) : a;
      OP_SHR:   y = data_t'(a >>> shift);
      OP_PASSB: y = b;
      default:  y = a;
    endcase
  end

endmodule
