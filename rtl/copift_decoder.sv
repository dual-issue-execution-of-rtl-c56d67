// copift_decoder: recognises the COPIFT instructions in an instruction word.
//
// The extension re-uses the RV32D encodings of fcvt.w[u].d, fcvt.d.w[u],
// feq.d, flt.d, fle.d and fclass.d unchanged except for the major opcode,
// which is custom-1 (0101011) instead of OP-FP. The decoder therefore checks
// the opcode, funct7, the rs2 field where it selects a variant (signed or
// unsigned conversion, fclass) and funct3 where it selects the comparison.
// Words that match none of the eight patterns, including the reserved
// rounding modes 101 and 110, give dec_o.valid = 0 so that the surrounding
// core can raise an illegal-instruction exception.
//
// Interface: instr_i (32-bit word), dec_o (copift_dec_t). Purely
// combinational, no clock.
//
// The choice of opcode and of copied encodings is the paper's; treating the
// reserved rounding modes as illegal follows the standard D extension.
module copift_decoder
  import copift_pkg::*;
(
  input  logic [31:0]  instr_i,
  output copift_dec_t  dec_o
);

  logic [6:0] opcode, funct7;
  logic [4:0] rs2;
  logic [2:0] funct3;
  logic       rm_legal;

  assign opcode = instr_i[6:0];
  assign funct3 = instr_i[14:12];
  assign rs2    = instr_i[24:20];
  assign funct7 = instr_i[31:25];
  assign rm_legal = (funct3 != 3'b101) && (funct3 != 3'b110);

  always_comb begin
    dec_o          = '0;
    dec_o.rd       = instr_i[11:7];
    dec_o.rs1      = instr_i[19:15];
    dec_o.rs2      = rs2;
    dec_o.rm       = funct3;
    dec_o.op       = OP_NONE;
    if (opcode == OPC_CUSTOM1) begin
      unique case (funct7)
        F7_FCVT_W_D: begin
          if (rm_legal && rs2 == 5'd0) dec_o.op = OP_FCVT_W_D;
          if (rm_legal && rs2 == 5'd1) dec_o.op = OP_FCVT_WU_D;
        end
        F7_FCVT_D_W: begin
          if (rm_legal && rs2 == 5'd0) dec_o.op = OP_FCVT_D_W;
          if (rm_legal && rs2 == 5'd1) dec_o.op = OP_FCVT_D_WU;
        end
        F7_FCMP_D: begin
          dec_o.uses_rs2 = 1'b1;
          unique case (funct3)
            F3_FEQ:  dec_o.op = OP_FEQ_D;
            F3_FLT:  dec_o.op = OP_FLT_D;
            F3_FLE:  dec_o.op = OP_FLE_D;
            default: dec_o.op = OP_NONE;
          endcase
        end
        F7_FCLASS_D: begin
          if (rs2 == 5'd0 && funct3 == F3_FCLASS) dec_o.op = OP_FCLASS_D;
        end
        default: dec_o.op = OP_NONE;
      endcase
    end
    dec_o.valid = (dec_o.op != OP_NONE);
    if (!dec_o.valid) dec_o.uses_rs2 = 1'b0;
  end

endmodule
