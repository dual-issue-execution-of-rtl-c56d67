// tb_copift_decoder: checks the custom-1 decoder against MATCH/MASK pairs
// taken from the standard RV32D encodings, with the OP-FP opcode (0x53)
// swapped for custom-1 (0x2b). Every COPIFT instruction is tried with random
// register fields and rounding modes; the standard OP-FP originals and
// random words must be rejected.
module tb_copift_decoder;
  import copift_pkg::*;
  import copift_ref_pkg::*;

  logic [31:0] instr;
  copift_dec_t dec;
  int checks = 0, failures = 0;
  int hits [9];

  copift_decoder dut (.instr_i(instr), .dec_o(dec));

  localparam logic [31:0] MATCH [8] = '{32'hc2000053, 32'hc2100053, 32'hd2000053, 32'hd2100053,
                                        32'ha2002053, 32'ha2001053, 32'ha2000053, 32'he2001053};
  localparam logic [31:0] MASK  [8] = '{32'hfff0007f, 32'hfff0007f, 32'hfff0007f, 32'hfff0007f,
                                        32'hfe00707f, 32'hfe00707f, 32'hfe00707f, 32'hfff0707f};
  localparam copift_op_e  OPS   [8] = '{OP_FCVT_W_D, OP_FCVT_WU_D, OP_FCVT_D_W, OP_FCVT_D_WU,
                                        OP_FEQ_D, OP_FLT_D, OP_FLE_D, OP_FCLASS_D};

  function automatic copift_op_e ref_op(input logic [31:0] w);
    for (int i = 0; i < 8; i++) begin
      if ((w & MASK[i]) == (MATCH[i] ^ 32'h53 ^ 32'h2b)) begin
        // conversions carry a rounding mode; 101 and 110 are reserved
        if (i < 4 && (w[14:12] == 3'b101 || w[14:12] == 3'b110)) return OP_NONE;
        return OPS[i];
      end
    end
    return OP_NONE;
  endfunction

  task automatic check(input logic [31:0] w);
    copift_op_e e;
    instr = w;
    #1;
    e = ref_op(w);
    hits[e]++;
    checks++;
    if (dec.valid !== (e != OP_NONE) || (e != OP_NONE &&
        (dec.op !== e || dec.rd !== w[11:7] || dec.rs1 !== w[19:15] ||
         (dec.uses_rs2 && dec.rs2 !== w[24:20]) || dec.rm !== w[14:12] ||
         dec.uses_rs2 !== (e inside {OP_FEQ_D, OP_FLT_D, OP_FLE_D})))) begin
      failures++;
      if (failures < 10) $display("FAIL w=%h got valid=%b op=%0d exp op=%0d", w, dec.valid, dec.op, e);
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
    for (int n = 0; n < 3000; n++) begin
      int k;
      logic [31:0] w;
      k = $urandom_range(0, 7);
      w = (MATCH[k] ^ 32'h53 ^ 32'h2b) | ($urandom & ~MASK[k]);
      check(w);
      check(w ^ 32'h53 ^ 32'h2b);      // the standard OP-FP instruction
      check($urandom);
      check({$urandom} & 32'hffff_ff80 | 32'h2b);  // random custom-1 word
    end
    for (int i = 1; i < 9; i++) begin
      checks++;
      if (hits[i] == 0) begin failures++; $display("op %0d never decoded", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
