// copift_pkg: types and constants shared by the COPIFT instruction-set
// extension.
//
// The COPIFT instructions are copies of eight RV32D instructions
// (fcvt.w.d, fcvt.wu.d, fcvt.d.w, fcvt.d.wu, feq.d, flt.d, fle.d, fclass.d)
// whose major opcode is moved from OP-FP (1010011) to custom-1 (0101011).
// All other fields (funct7, rs2, funct3/rm, rs1, rd) keep their standard
// encodings, so the same field constants below serve both. Unlike the
// standard instructions, every COPIFT operand and result lives in the FP
// register file: an integer value is held in bits [31:0] of a 64-bit FP
// register with bits [63:32] zero (this placement is a choice of this
// design; the operation set and opcode follow the paper).
package copift_pkg;

  localparam int unsigned FLEN = 64;   // binary64 FP register width (RV32D)
  localparam int unsigned XLEN = 32;   // integer width carried inside FP registers
  localparam int unsigned NREGS = 32;  // architectural FP registers
  localparam int unsigned RegAddrW = 5;

  // Major opcodes (RISC-V unprivileged spec, base opcode map).
  localparam logic [6:0] OPC_OP_FP   = 7'b1010011;
  localparam logic [6:0] OPC_CUSTOM1 = 7'b0101011;

  // funct7 values of the RV32D instructions that COPIFT copies.
  localparam logic [6:0] F7_FCMP_D   = 7'b1010001;  // feq.d / flt.d / fle.d
  localparam logic [6:0] F7_FCVT_W_D = 7'b1100001;  // fcvt.w[u].d
  localparam logic [6:0] F7_FCVT_D_W = 7'b1101001;  // fcvt.d.w[u]
  localparam logic [6:0] F7_FCLASS_D = 7'b1110001;  // fclass.d

  // funct3 selecting the comparison.
  localparam logic [2:0] F3_FLE = 3'b000;
  localparam logic [2:0] F3_FLT = 3'b001;
  localparam logic [2:0] F3_FEQ = 3'b010;
  localparam logic [2:0] F3_FCLASS = 3'b001;

  // RISC-V rounding modes (rm field / frm CSR).
  typedef enum logic [2:0] {
    RM_RNE = 3'b000,
    RM_RTZ = 3'b001,
    RM_RDN = 3'b010,
    RM_RUP = 3'b011,
    RM_RMM = 3'b100,
    RM_DYN = 3'b111
  } rm_e;

  // Operations of the extension.
  typedef enum logic [3:0] {
    OP_NONE     = 4'd0,
    OP_FCVT_W_D  = 4'd1,  // binary64 -> int32
    OP_FCVT_WU_D = 4'd2,  // binary64 -> uint32
    OP_FCVT_D_W  = 4'd3,  // int32    -> binary64
    OP_FCVT_D_WU = 4'd4,  // uint32   -> binary64
    OP_FEQ_D     = 4'd5,
    OP_FLT_D     = 4'd6,
    OP_FLE_D     = 4'd7,
    OP_FCLASS_D  = 4'd8
  } copift_op_e;

  // RISC-V fflags bit positions: NV DZ OF UF NX.
  typedef struct packed {
    logic nv;
    logic dz;
    logic of;
    logic uf;
    logic nx;
  } fflags_t;

  // Decoded instruction.
  typedef struct packed {
    logic                 valid;   // instruction is a COPIFT instruction
    copift_op_e           op;
    logic [RegAddrW-1:0]  rd;
    logic [RegAddrW-1:0]  rs1;
    logic [RegAddrW-1:0]  rs2;
    logic [2:0]           rm;      // raw rm / funct3 field
    logic                 uses_rs2;
  } copift_dec_t;

  // Request into the execution unit: decoded operation with operands.
  typedef struct packed {
    copift_op_e           op;
    rm_e                  rm;      // resolved rounding mode (never DYN)
    logic [RegAddrW-1:0]  rd;
    logic [FLEN-1:0]      a;       // rs1 value
    logic [FLEN-1:0]      b;       // rs2 value
  } copift_req_t;

  // Write-back towards the FP register file.
  typedef struct packed {
    logic [RegAddrW-1:0]  rd;
    logic [FLEN-1:0]      data;
    fflags_t              flags;
  } copift_rsp_t;

  // Zero-extend a 32-bit integer result into an FP register value.
  function automatic logic [FLEN-1:0] int_to_freg(input logic [XLEN-1:0] v);
    return {{(FLEN-XLEN){1'b0}}, v};
  endfunction

endpackage
