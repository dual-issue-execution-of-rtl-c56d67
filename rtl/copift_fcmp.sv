// copift_fcmp: binary64 comparisons feq.d, flt.d and fle.d with the COPIFT
// semantics: the 0/1 result is returned for the FP register file.
//
// Operands are compared as sign-magnitude numbers: with equal signs the
// magnitudes (exponent and mantissa bits, which order like unsigned
// integers) decide, reversed for negatives; with different signs the
// negative one is smaller unless both are zeros, since +0 and -0 compare
// equal. Any NaN operand makes the result 0. As in the standard D
// extension, feq.d raises NV only for a signalling NaN, flt.d and fle.d
// for any NaN.
//
// Interface: a_i, b_i operands (rs1, rs2), op_i one of OP_FEQ_D, OP_FLT_D,
// OP_FLE_D, res_o result bit, flags_o fflags. Purely combinational.
//
// The operation set is the paper's; the comparator is this design's own.
module copift_fcmp
  import copift_pkg::*;
(
  input  logic [FLEN-1:0] a_i,
  input  logic [FLEN-1:0] b_i,
  input  copift_op_e      op_i,
  output logic            res_o,
  output fflags_t         flags_o
);

  logic a_nan, b_nan, a_snan, b_snan, both_zero, eq, lt;
  logic [62:0] a_mag, b_mag;

  assign a_mag  = a_i[62:0];
  assign b_mag  = b_i[62:0];
  assign a_nan  = (a_i[62:52] == 11'h7ff) && (a_i[51:0] != '0);
  assign b_nan  = (b_i[62:52] == 11'h7ff) && (b_i[51:0] != '0);
  assign a_snan = a_nan && !a_i[51];
  assign b_snan = b_nan && !b_i[51];
  assign both_zero = (a_mag == '0) && (b_mag == '0);
  assign eq = both_zero || (a_i == b_i);

  always_comb begin
    if (a_i[63] != b_i[63])  lt = a_i[63] && !both_zero;
    else if (!a_i[63])       lt = a_mag < b_mag;
    else                     lt = a_mag > b_mag;
  end

  always_comb begin
    res_o   = 1'b0;
    flags_o = '0;
    unique case (op_i)
      OP_FEQ_D: begin
        res_o      = !(a_nan || b_nan) && eq;
        flags_o.nv = a_snan || b_snan;
      end
      OP_FLT_D: begin
        res_o      = !(a_nan || b_nan) && lt;
        flags_o.nv = a_nan || b_nan;
      end
      OP_FLE_D: begin
        res_o      = !(a_nan || b_nan) && (lt || eq);
        flags_o.nv = a_nan || b_nan;
      end
      default: ;
    endcase
  end

endmodule
