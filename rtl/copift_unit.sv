// copift_unit: execution unit for the COPIFT instructions.
//
// It takes one request per cycle (operation, resolved rounding mode,
// destination register and the two FP register operands), steers it to the
// conversion, comparison or classification datapath, formats the result as
// a 64-bit FP register value and holds it in a single output register until
// the FP register file write port accepts it. Integer results (fcvt.w[u].d,
// feq/flt/fle.d, fclass.d) are zero-extended from bit 31 (or from the mask
// width); fcvt.d.w[u] produces a binary64 value.
//
// Interface: req_valid_i / req_ready_o / req_i in, rsp_valid_o /
// rsp_ready_i / rsp_o out, both valid/ready handshakes (a transfer happens
// on a rising clock edge where valid and ready are both high; valid and
// payload hold until then). Latency is one cycle: a request accepted at
// edge n is offered on rsp at edge n. The unit accepts a new request in
// the same cycle its held result leaves, so it sustains one operation per
// cycle; when the write port is busy it back-pressures (req_ready_o low).
//
// The set of operations is the paper's. The single-cycle latency, the
// handshake and the placement of integer results in the FP register are
// this design's choices. The handshake assertions below use the reset as
// their disable condition, which the lint tool reports as a reset used both
// synchronously and asynchronously; it has no effect on the logic.
module copift_unit
  import copift_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_valid_i,
  output logic        req_ready_o,
  input  copift_req_t req_i,
  output logic        rsp_valid_o,
  input  logic        rsp_ready_i,
  output copift_rsp_t rsp_o
);

  logic [XLEN-1:0] f2i_res;
  fflags_t         f2i_flags, cmp_flags;
  logic [FLEN-1:0] i2f_res;
  logic            cmp_res;
  logic [9:0]      cls_res;
  copift_rsp_t     rsp_d;

  copift_f2i u_f2i (
    .a_i        (req_i.a),
    .rm_i       (req_i.rm),
    .unsigned_i (req_i.op == OP_FCVT_WU_D),
    .res_o      (f2i_res),
    .flags_o    (f2i_flags)
  );

  copift_i2f u_i2f (
    .a_i        (req_i.a),
    .unsigned_i (req_i.op == OP_FCVT_D_WU),
    .res_o      (i2f_res)
  );

  copift_fcmp u_fcmp (
    .a_i     (req_i.a),
    .b_i     (req_i.b),
    .op_i    (req_i.op),
    .res_o   (cmp_res),
    .flags_o (cmp_flags)
  );

  copift_fclass u_fclass (
    .a_i   (req_i.a),
    .res_o (cls_res)
  );

  always_comb begin
    rsp_d    = '0;
    rsp_d.rd = req_i.rd;
    unique case (req_i.op)
      OP_FCVT_W_D, OP_FCVT_WU_D: begin
        rsp_d.data  = int_to_freg(f2i_res);
        rsp_d.flags = f2i_flags;
      end
      OP_FCVT_D_W, OP_FCVT_D_WU: rsp_d.data = i2f_res;
      OP_FEQ_D, OP_FLT_D, OP_FLE_D: begin
        rsp_d.data  = int_to_freg({31'd0, cmp_res});
        rsp_d.flags = cmp_flags;
      end
      OP_FCLASS_D: rsp_d.data = int_to_freg({22'd0, cls_res});
      default: ;
    endcase
  end

  assign req_ready_o = !rsp_valid_o || rsp_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_valid_o <= 1'b0;
      rsp_o       <= '0;
    end else if (req_ready_o) begin
      rsp_valid_o <= req_valid_i;
      if (req_valid_i) rsp_o <= rsp_d;
    end
  end

  // A held result must not change or disappear before it is accepted.
  property p_rsp_stable;
    @(posedge clk_i) disable iff (!rst_ni)
      rsp_valid_o && !rsp_ready_i |=> rsp_valid_o && $stable(rsp_o);
  endproperty
  a_rsp_stable: assert property (p_rsp_stable);

  // Only operations of the extension may be issued to the unit.
  a_op_known: assert property (@(posedge clk_i) disable iff (!rst_ni)
    req_valid_i |-> req_i.op != OP_NONE);

endmodule
