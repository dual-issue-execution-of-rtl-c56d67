// copift_i2f: 32-bit integer to binary64 conversion (fcvt.d.w / fcvt.d.wu)
// with the COPIFT semantics: the integer operand is read from bits [31:0] of
// an FP register instead of from the integer register file.
//
// Every 32-bit integer is exactly representable in binary64, so no rounding
// is needed and no flag is ever raised. The magnitude is taken (negating a
// negative signed value), a leading-one detector gives its position p, the
// exponent is 1023 + p and the magnitude, shifted so that the leading one
// falls on the hidden-bit position 52, supplies the mantissa. Zero gives +0.
//
// Interface: a_i FP register value (only bits [31:0] are read, so the lint
// tool reports bits [63:32] as unused by design), unsigned_i selects
// fcvt.d.wu, res_o binary64 result. Purely combinational.
//
// The operation is the paper's; the datapath is this design's own.
module copift_i2f
  import copift_pkg::*;
(
  input  logic [FLEN-1:0] a_i,
  input  logic            unsigned_i,
  output logic [FLEN-1:0] res_o
);

  logic [XLEN-1:0] val, mag;
  logic            sign;
  logic [4:0]      lead;
  logic [51:0]     frac;

  assign val  = a_i[XLEN-1:0];
  assign sign = ~unsigned_i & val[XLEN-1];
  assign mag  = sign ? (~val + 32'd1) : val;

  always_comb begin
    lead = '0;
    for (int i = 0; i < XLEN; i++) begin
      if (mag[i]) lead = 5'(i);
    end
    // shift the leading one to bit 52 and drop it (the hidden bit)
    frac  = 52'(53'(mag) << (6'd52 - {1'b0, lead}));
    if (mag == '0) res_o = '0;
    else           res_o = {sign, 11'(11'd1023 + 11'(lead)), frac};
  end

endmodule
