// copift_top: the COPIFT extension as it attaches to a Snitch-style FP
// subsystem.
//
// Snitch's integer core (or its FREP sequencer, when a loop body is being
// replayed) offloads instruction words to the FP subsystem. This block takes
// such a word, decodes it as one of the eight COPIFT instructions, reads its
// one or two source operands from the FP register file, resolves the
// rounding mode (the instruction's rm field, or frm_i for the dynamic
// mode), and executes it in copift_unit. The result, including the integer
// results of conversions, comparisons and fclass, is written back to the FP
// register file, never to the integer one: this is what lets an FP thread
// that needs these operations run without touching integer state, so that
// it can overlap with the integer thread.
//
// Hazards. The result waits in the unit's output register until the FP
// register file write port, which it shares with the rest of the FP
// subsystem, grants it (wb_ready_i). An instruction that reads the register
// the waiting result will write is held (instr_ready_o low) until the write
// has happened, since operands are read straight from the register file.
// A word that is not a COPIFT instruction, or that uses the dynamic rounding
// mode while frm_i holds a reserved value, is consumed in one cycle with
// illegal_o high and has no other effect.
//
// Interface: instruction offload instr_valid_i / instr_ready_o / instr_i;
// register file read ports rf_raddr_o[0..1] with same-cycle data
// rf_rdata_i[0..1]; write port wb_valid_o / wb_ready_i / wb_addr_o /
// wb_data_o; exception flags fflags_o, valid with wb_valid_o, for the
// fflags CSR. The FP register file, the CSR file and the offloading core
// are outside this block.
//
// Following the paper: the opcode and encodings (copies of the RV32D ones
// in custom-1), the operation set, and keeping all operands and results in
// the FP register file. This design's own: the operand and write-back
// ports, the one-cycle latency, the stall-on-hazard policy and the
// illegal-instruction handling. The handshake assertion's disable
// condition uses the reset, which the lint tool reports as a reset used both
// synchronously and asynchronously; it has no effect on the logic.
module copift_top
  import copift_pkg::*;
(
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // instruction offload
  input  logic                     instr_valid_i,
  output logic                     instr_ready_o,
  input  logic [31:0]              instr_i,
  output logic                     illegal_o,
  input  logic [2:0]               frm_i,
  // FP register file read ports
  output logic [1:0][RegAddrW-1:0] rf_raddr_o,
  input  logic [1:0][FLEN-1:0]     rf_rdata_i,
  // FP register file write port
  output logic                     wb_valid_o,
  input  logic                     wb_ready_i,
  output logic [RegAddrW-1:0]      wb_addr_o,
  output logic [FLEN-1:0]          wb_data_o,
  output fflags_t                  fflags_o
);

  copift_dec_t dec;
  copift_req_t req;
  copift_rsp_t rsp;
  logic        legal, raw_hazard, unit_ready, unit_valid;
  rm_e         rm_res;

  copift_decoder u_dec (
    .instr_i (instr_i),
    .dec_o   (dec)
  );

  // Rounding mode: static field, or the frm CSR for the dynamic mode.
  always_comb begin
    rm_res = rm_e'(dec.rm);
    if (dec.rm == RM_DYN) rm_res = rm_e'(frm_i);
  end

  assign legal = dec.valid &&
                 !((dec.op inside {OP_FCVT_W_D, OP_FCVT_WU_D, OP_FCVT_D_W, OP_FCVT_D_WU}) &&
                   dec.rm == RM_DYN && frm_i inside {3'b101, 3'b110, 3'b111});

  assign rf_raddr_o[0] = dec.rs1;
  assign rf_raddr_o[1] = dec.rs2;

  // Read-after-write on the result still waiting for the write port.
  assign raw_hazard = wb_valid_o &&
                      ((dec.rs1 == rsp.rd) || (dec.uses_rs2 && dec.rs2 == rsp.rd));

  always_comb begin
    req    = '0;
    req.op = dec.op;
    req.rm = rm_res;
    req.rd = dec.rd;
    req.a  = rf_rdata_i[0];
    req.b  = rf_rdata_i[1];
  end

  assign unit_valid    = instr_valid_i && legal && !raw_hazard;
  assign instr_ready_o = legal ? (unit_ready && !raw_hazard) : 1'b1;
  assign illegal_o     = instr_valid_i && !legal;

  copift_unit u_unit (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .req_valid_i (unit_valid),
    .req_ready_o (unit_ready),
    .req_i       (req),
    .rsp_valid_o (wb_valid_o),
    .rsp_ready_i (wb_ready_i),
    .rsp_o       (rsp)
  );

  assign wb_addr_o = rsp.rd;
  assign wb_data_o = rsp.data;
  assign fflags_o  = rsp.flags;

  // An offered instruction must stay until it is taken.
  a_instr_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    instr_valid_i && !instr_ready_o |=> instr_valid_i && $stable(instr_i));

endmodule
