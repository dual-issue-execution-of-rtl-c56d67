// copift_f2i: binary64 to 32-bit integer conversion (fcvt.w.d / fcvt.wu.d)
// with the COPIFT semantics, i.e. the integer result is returned for the FP
// register file rather than the integer one.
//
// The significand (with its hidden bit) is placed in a 106-bit window and
// shifted right by 52 - E, where E is the unbiased exponent, so that the
// upper 53 bits hold the integer part and the lower 53 bits the fraction.
// The first fraction bit is the round bit, the rest OR together into the
// sticky bit. The magnitude is incremented according to the rounding mode,
// then range-checked. Out-of-range inputs, infinities and NaNs saturate as
// the RISC-V specification prescribes (NaN gives the largest positive
// value) and raise NV; an in-range inexact result raises NX.
//
// Interface: a_i operand, rm_i resolved rounding mode (not DYN),
// unsigned_i selects fcvt.wu.d, res_o 32-bit result, flags_o fflags.
// Purely combinational.
//
// The operation set is the paper's; the datapath is this design's own
// minimal implementation of the standard RISC-V conversion.
module copift_f2i
  import copift_pkg::*;
(
  input  logic [FLEN-1:0] a_i,
  input  rm_e             rm_i,
  input  logic            unsigned_i,
  output logic [XLEN-1:0] res_o,
  output fflags_t         flags_o
);

  logic        sign;
  logic [10:0] exp;
  logic [51:0] man;
  logic        is_nan, is_inf;
  logic [52:0] sig;
  logic signed [12:0] e_unb;     // unbiased exponent
  logic [105:0] window;
  logic [5:0]   shamt;
  logic [52:0]  int_part;
  logic         round_bit, sticky, inexact, inc, tiny;
  logic [33:0]  mag;             // rounded magnitude
  logic         ovf;

  assign sign   = a_i[63];
  assign exp    = a_i[62:52];
  assign man    = a_i[51:0];
  assign is_nan = (exp == 11'h7ff) && (man != '0);
  assign is_inf = (exp == 11'h7ff) && (man == '0);
  assign sig    = {exp != 11'd0, man};
  // Subnormals have exponent 1 - 1023; they are all far below 0.5.
  assign e_unb  = (exp == 11'd0) ? -13'sd1022 : $signed({2'b00, exp}) - 13'sd1023;

  always_comb begin
    // |x| < 0.5 when E < -1: integer part 0, round bit 0, sticky if nonzero.
    tiny      = (e_unb < -13'sd1);
    shamt     = '0;
    window    = '0;
    int_part  = '0;
    round_bit = 1'b0;
    sticky    = 1'b0;
    if (tiny) begin
      sticky = (sig != '0);
    end else if (e_unb <= 13'sd52) begin
      shamt     = 6'(13'sd52 - e_unb);
      window    = {sig, 53'd0} >> shamt;
      int_part  = window[105:53];
      round_bit = window[52];
      sticky    = (window[51:0] != '0);
    end
    inexact = round_bit | sticky;
    unique case (rm_i)
      RM_RNE:  inc = round_bit & (sticky | int_part[0]);
      RM_RTZ:  inc = 1'b0;
      RM_RDN:  inc = sign & inexact;
      RM_RUP:  inc = ~sign & inexact;
      RM_RMM:  inc = round_bit;
      default: inc = 1'b0;
    endcase
    // Anything with E >= 33 is out of range for any 32-bit result.
    ovf = (e_unb > 13'sd32);
    mag = ovf ? '1 : 34'(int_part[33:0]) + 34'(inc);
    if (!ovf && int_part[52:34] != '0) ovf = 1'b1;

    flags_o = '0;
    res_o   = '0;
    if (is_nan) begin
      res_o      = unsigned_i ? 32'hffff_ffff : 32'h7fff_ffff;
      flags_o.nv = 1'b1;
    end else if (unsigned_i) begin
      if (!sign && (is_inf || ovf || mag > 34'h0_ffff_ffff)) begin
        res_o      = 32'hffff_ffff;
        flags_o.nv = 1'b1;
      end else if (sign && (is_inf || ovf || mag != '0)) begin
        res_o      = 32'h0;
        flags_o.nv = 1'b1;
      end else begin
        res_o      = mag[31:0];
        flags_o.nx = inexact;
      end
    end else begin
      if (!sign && (is_inf || ovf || mag > 34'h0_7fff_ffff)) begin
        res_o      = 32'h7fff_ffff;
        flags_o.nv = 1'b1;
      end else if (sign && (is_inf || ovf || mag > 34'h0_8000_0000)) begin
        res_o      = 32'h8000_0000;
        flags_o.nv = 1'b1;
      end else begin
        res_o      = sign ? 32'(-mag[31:0]) : mag[31:0];
        flags_o.nx = inexact;
      end
    end
  end

endmodule
