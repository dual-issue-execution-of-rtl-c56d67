// copift_ref_pkg: reference model of the COPIFT operations for the
// testbenches.
//
// The expected results are computed with the simulator's own
// double-precision arithmetic ($bitstoreal, $floor, $ceil, real
// comparisons) rather than by manipulating bit fields, so that they do not
// share the structure of the RTL they check. Integer results are returned
// as the 64-bit FP register value (zero-extended 32-bit integer), flags as
// {nv, nx}. Also holds encoders for the eight custom-1 instructions.
package copift_ref_pkg;

  localparam logic [6:0] CUSTOM1 = 7'h2b;

  // NaN: all-ones exponent, nonzero mantissa (the simulator's real
  // comparisons cannot be relied on to detect NaN).
  function automatic bit is_nan(input logic [63:0] b);
    return (b[62:52] == 11'h7ff) && (b[51:0] != 52'd0);
  endfunction

  // Signalling NaN: NaN whose mantissa MSB is clear.
  function automatic bit is_snan(input logic [63:0] b);
    return is_nan(b) && !b[51];
  endfunction

  function automatic real round_rm(input real v, input int rm);
    real fl, ce;
    fl = $floor(v);
    ce = $ceil(v);
    case (rm)
      0: begin // nearest, ties to even
        if (v - fl > 0.5) return ce;
        if (v - fl < 0.5) return fl;
        return ($floor(fl / 2.0) * 2.0 == fl) ? fl : ce;
      end
      1: return (v < 0.0) ? ce : fl;
      2: return fl;
      3: return ce;
      default: begin // nearest, ties away from zero
        if (v >= 0.0) return (v - fl >= 0.5) ? ce : fl;
        return (ce - v >= 0.5) ? fl : ce;
      end
    endcase
  endfunction

  // fcvt.w[u].d; returns {nv, nx} in flags.
  function automatic logic [63:0] ref_f2i(input logic [63:0] b, input int rm,
                                          input bit uns, output logic [1:0] flags);
    real v, r;
    longint q;
    flags = 2'b00;
    if (is_nan(b)) begin
      flags = 2'b10;
      return uns ? 64'hffff_ffff : 64'h7fff_ffff;
    end
    v = $bitstoreal(b);
    if (v > 1.0e12 || v < -1.0e12) r = v;
    else r = round_rm(v, rm);
    if (uns) begin
      if (r > 4294967295.0) begin flags = 2'b10; return 64'hffff_ffff; end
      if (r < 0.0)          begin flags = 2'b10; return 64'h0; end
    end else begin
      if (r > 2147483647.0)  begin flags = 2'b10; return 64'h7fff_ffff; end
      if (r < -2147483648.0) begin flags = 2'b10; return 64'h8000_0000; end
    end
    q = longint'(r);
    flags = {1'b0, r != v};
    return {32'd0, q[31:0]};
  endfunction

  // fcvt.d.w[u]
  function automatic logic [63:0] ref_i2f(input logic [63:0] b, input bit uns);
    real v;
    if (uns) v = real'(longint'({32'd0, b[31:0]}));
    else     v = real'(int'(b[31:0]));
    return $realtobits(v);
  endfunction

  // feq.d (op 0), flt.d (op 1), fle.d (op 2); returns {nv, nx} in flags.
  function automatic logic [63:0] ref_cmp(input logic [63:0] a, input logic [63:0] b,
                                          input int op, output logic [1:0] flags);
    real x, y;
    bit r;
    x = $bitstoreal(a);
    y = $bitstoreal(b);
    if (is_nan(a) || is_nan(b)) begin
      flags = {(op == 0) ? (is_snan(a) || is_snan(b)) : 1'b1, 1'b0};
      return 64'd0;
    end
    case (op)
      0: begin r = (x == y); flags = {is_snan(a) || is_snan(b), 1'b0}; end
      1: begin r = (x <  y); flags = {is_nan(a)  || is_nan(b),  1'b0}; end
      default: begin r = (x <= y); flags = {is_nan(a) || is_nan(b), 1'b0}; end
    endcase
    return {63'd0, r};
  endfunction

  // fclass.d
  function automatic logic [63:0] ref_class(input logic [63:0] a);
    real v, m;
    bit neg;
    int idx;
    v   = $bitstoreal(a);
    neg = a[63];
    m   = neg ? -v : v;
    if (is_nan(a))                       idx = a[51] ? 9 : 8;
    else if (m > 1.7976931348623157e308) idx = neg ? 0 : 7;
    else if (m == 0.0)                   idx = neg ? 3 : 4;
    else if (m < 2.2250738585072014e-308) idx = neg ? 2 : 5;
    else                                 idx = neg ? 1 : 6;
    return 64'(1) << idx;
  endfunction

  // Instruction encoders (RV32D field layout, custom-1 opcode).
  function automatic logic [31:0] enc(input logic [6:0] f7, input logic [4:0] rs2,
                                      input logic [4:0] rs1, input logic [2:0] f3,
                                      input logic [4:0] rd);
    return {f7, rs2, rs1, f3, rd, CUSTOM1};
  endfunction

  // Random binary64 operand drawn from interesting classes.
  function automatic logic [63:0] rand_fp();
    int unsigned sel;
    real v;
    sel = $urandom_range(0, 15);
    case (sel)
      0: return 64'h7ff8_0000_0000_0000 | 64'($urandom);          // qNaN
      1: return 64'h7ff0_0000_0000_0001 | 64'($urandom_range(0, 1000)); // sNaN
      2: return {$urandom_range(0, 1) == 1, 63'h7ff0_0000_0000_0000}; // inf
      3: return {$urandom_range(0, 1) == 1, 63'd0};                 // zero
      4: return {$urandom_range(0, 1) == 1, 11'd0, 20'($urandom), 32'($urandom)}; // subnormal
      5: begin // exact half-integers
        v = real'(int'($urandom_range(0, 200)) - 100) + 0.5;
        return $realtobits(v);
      end
      6: return $realtobits(real'(int'($urandom)));                 // integral int32
      7: return $realtobits(real'(longint'({32'd0, $urandom})));    // integral uint32
      8: return $realtobits(2147483647.5 + real'($urandom_range(0, 2)) - 1.0);
      9: return $realtobits(4294967295.5 + real'($urandom_range(0, 2)) - 1.0);
      10: return $realtobits(-2147483648.5 + real'($urandom_range(0, 2)) - 1.0);
      default: begin // random magnitude between 2^-3 and 2^34
        return {$urandom_range(0, 1) == 1, 11'(1020 + $urandom_range(0, 14 + 21 * (sel - 11) / 4)),
                20'($urandom), 32'($urandom)};
      end
    endcase
  endfunction

  // Reference execution of one operation: FP register value and {nv, nx}.
  function automatic logic [63:0] ref_exec(input copift_pkg::copift_op_e op, input int rm,
                                           input logic [63:0] a, input logic [63:0] b,
                                           output logic [1:0] fl);
    fl = 2'b00;
    case (op)
      copift_pkg::OP_FCVT_W_D:  return ref_f2i(a, rm, 1'b0, fl);
      copift_pkg::OP_FCVT_WU_D: return ref_f2i(a, rm, 1'b1, fl);
      copift_pkg::OP_FCVT_D_W:  return ref_i2f(a, 1'b0);
      copift_pkg::OP_FCVT_D_WU: return ref_i2f(a, 1'b1);
      copift_pkg::OP_FEQ_D:     return ref_cmp(a, b, 0, fl);
      copift_pkg::OP_FLT_D:     return ref_cmp(a, b, 1, fl);
      copift_pkg::OP_FLE_D:     return ref_cmp(a, b, 2, fl);
      default:                  return ref_class(a);
    endcase
  endfunction

endpackage
