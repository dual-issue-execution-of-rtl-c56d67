// copift_fclass: fclass.d with the COPIFT semantics: the 10-bit class mask
// is returned for the FP register file.
//
// Exactly one bit of the mask is set, in the RISC-V order: 0 -inf,
// 1 negative normal, 2 negative subnormal, 3 -0, 4 +0, 5 positive
// subnormal, 6 positive normal, 7 +inf, 8 signalling NaN, 9 quiet NaN.
// fclass never raises a flag.
//
// Interface: a_i operand, res_o class mask. Purely combinational.
//
// The operation is the paper's; the classifier is this design's own.
module copift_fclass
  import copift_pkg::*;
(
  input  logic [FLEN-1:0] a_i,
  output logic [9:0]      res_o
);

  logic        s;
  logic [10:0] e;
  logic [51:0] m;
  logic        exp_max, exp_zero, man_zero;

  assign s        = a_i[63];
  assign e        = a_i[62:52];
  assign m        = a_i[51:0];
  assign exp_max  = (e == 11'h7ff);
  assign exp_zero = (e == 11'h000);
  assign man_zero = (m == '0);

  always_comb begin
    res_o = '0;
    if (exp_max && !man_zero) begin
      if (m[51]) res_o[9] = 1'b1;
      else       res_o[8] = 1'b1;
    end else if (exp_max) begin
      res_o[s ? 0 : 7] = 1'b1;
    end else if (exp_zero && man_zero) begin
      res_o[s ? 3 : 4] = 1'b1;
    end else if (exp_zero) begin
      res_o[s ? 2 : 5] = 1'b1;
    end else begin
      res_o[s ? 1 : 6] = 1'b1;
    end
  end

endmodule
