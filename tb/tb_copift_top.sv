// tb_copift_top: end-to-end test of the COPIFT extension at its default
// configuration. A behavioural FP register file (32 x 64 bit, two
// combinational read ports, one write port whose grant is randomly
// withheld to mimic a shared write-back port) is attached to the block.
// A stream of random instruction words is offloaded: all eight COPIFT
// instructions with static and dynamic rounding modes, reserved rounding
// modes and non-COPIFT words. Destinations are drawn from eight registers so that read-after-write hazards on the pending result
// are frequent, while eight more registers, never written, keep a supply of
// NaNs, infinities and out-of-range values. An in-order reference model with its own copy of the
// register file predicts every write (register, value, flags); at the end
// both register files must agree. In a final phase with the write port
// always free, every write must land one cycle after its instruction was
// accepted. Each mechanism (every operation, dynamic rounding, illegal
// instruction, hazard stall, write-port stall, NV and NX flags) must occur
// at least once.
module tb_copift_top;
  import copift_pkg::*;
  import copift_ref_pkg::*;

  logic                     clk = 0, rst_n = 0;
  logic                     instr_valid, instr_ready, illegal;
  logic [31:0]              instr;
  logic [2:0]               frm;
  logic [1:0][4:0]          raddr;
  logic [1:0][63:0]         rdata;
  logic                     wb_valid, wb_ready;
  logic [4:0]               wb_addr;
  logic [63:0]              wb_data;
  fflags_t                  fflags;

  logic [63:0] rf [32];    // behavioural FP register file
  logic [63:0] srf [32];   // reference model's register file

  typedef struct {
    logic [4:0]  rd;
    logic [63:0] data;
    logic [1:0]  fl;
    int          cyc;
  } exp_t;
  exp_t expq [$];

  int checks = 0, failures = 0, cycle = 0;
  int n_op [9];
  int n_dyn = 0, n_illegal = 0, n_raw_stall = 0, n_wb_stall = 0, n_nv = 0, n_nx = 0;
  bit throttle = 1, check_latency = 0;

  copift_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_ready_o(instr_ready), .instr_i(instr),
    .illegal_o(illegal), .frm_i(frm),
    .rf_raddr_o(raddr), .rf_rdata_i(rdata),
    .wb_valid_o(wb_valid), .wb_ready_i(wb_ready), .wb_addr_o(wb_addr), .wb_data_o(wb_data),
    .fflags_o(fflags)
  );

  always #5 clk = ~clk;
  always @(negedge clk) cycle++;   // read at posedge without a race

  assign rdata[0] = rf[raddr[0]];
  assign rdata[1] = rf[raddr[1]];

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // register file write port and write checker
  always @(posedge clk) begin
    if (rst_n && wb_valid && !wb_ready) n_wb_stall++;
    if (rst_n && wb_valid && wb_ready) begin
      exp_t e;
      rf[wb_addr] <= wb_data;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected write");
      end else begin
        e = expq.pop_front();
        if (wb_addr !== e.rd || wb_data !== e.data || {fflags.nv, fflags.nx} !== e.fl ||
            fflags.of || fflags.uf || fflags.dz) begin
          failures++;
          if (failures < 10) $display("FAIL write rd=%0d %h fl=%b exp rd=%0d %h fl=%b",
                                      wb_addr, wb_data, {fflags.nv, fflags.nx}, e.rd, e.data, e.fl);
        end
        if (check_latency) begin
          checks++;
          if (cycle != e.cyc + 1) begin
            failures++;
            $display("FAIL write-back %0d cycles after issue, expected 1", cycle - e.cyc);
          end
        end
      end
    end
  end

  always @(negedge clk) wb_ready <= throttle ? ($urandom_range(0, 2) != 0) : 1'b1;

  // Random instruction: returns the word; sets the expected operation,
  // rounding mode and legality.
  localparam logic [6:0] F7 [8] = '{7'h61, 7'h61, 7'h69, 7'h69, 7'h51, 7'h51, 7'h51, 7'h71};
  localparam copift_op_e OPS [8] = '{OP_FCVT_W_D, OP_FCVT_WU_D, OP_FCVT_D_W, OP_FCVT_D_WU,
                                     OP_FEQ_D, OP_FLT_D, OP_FLE_D, OP_FCLASS_D};

  task automatic gen(output logic [31:0] w, output copift_op_e op, output int rm, output bit legal,
                     output logic [2:0] frm_v);
    int k, sel;
    logic [2:0] f3;
    logic [4:0] rs2;
    frm_v = 3'($urandom_range(0, 4));
    if ($urandom_range(0, 15) < 8) frm_v = 3'($urandom_range(0, 7));  // reserved too
    sel = $urandom_range(0, 19);
    if (sel == 0) begin                      // not a COPIFT word (standard fcvt.w.d)
      w = 32'hc2000053 | {12'd0, 5'($urandom), 15'd0};
      op = OP_NONE; legal = 0; rm = 0;
      return;
    end
    if (sel == 1) begin                      // reserved static rounding mode
      w = enc(7'h61, 5'd0, 5'($urandom_range(0, 7)), 3'b101, 5'($urandom_range(0, 7)));
      op = OP_NONE; legal = 0; rm = 0;
      return;
    end
    k   = $urandom_range(0, 7);
    op  = OPS[k];
    rs2 = 5'd0;
    case (k)
      0, 2: rs2 = 5'd0;
      1, 3: rs2 = 5'd1;
      4: f3 = 3'b010;
      5: f3 = 3'b001;
      6: f3 = 3'b000;
      7: begin rs2 = 5'd0; f3 = 3'b001; end
      default: ;
    endcase
    if (k < 4) begin
      f3 = ($urandom_range(0, 3) == 0) ? 3'b111 : 3'($urandom_range(0, 4));
      rm = (f3 == 3'b111) ? int'(frm_v) : int'(f3);
      legal = !(f3 == 3'b111 && frm_v > 3'd4);
    end else begin
      rm = 0;
      legal = 1;
    end
    if (k >= 4 && k != 7) rs2 = 5'($urandom_range(0, 15));
    w = enc(F7[k], rs2, 5'($urandom_range(0, 15)), f3, 5'($urandom_range(0, 7)));
  endtask

  task automatic run(input int count);
    logic [31:0] w;
    copift_op_e  op;
    int          rm;
    bit          legal;
    logic [2:0]  frm_v;
    for (int i = 0; i < count; i++) begin
      gen(w, op, rm, legal, frm_v);
      @(negedge clk);
      instr = w; frm = frm_v; instr_valid = 1;
      @(posedge clk);
      while (!instr_ready) begin
        if (wb_ready) n_raw_stall++;   // unit free, so the hold is the hazard
        @(posedge clk);
      end
      checks++;
      if (illegal !== !legal) begin
        failures++;
        $display("FAIL illegal flag %b for %h, expected %b", illegal, w, !legal);
      end
      if (!legal) n_illegal++;
      else begin
        exp_t e;
        logic [1:0] fl;
        n_op[op]++;
        if (w[14:12] == 3'b111 && op inside {OP_FCVT_W_D, OP_FCVT_WU_D, OP_FCVT_D_W, OP_FCVT_D_WU})
          n_dyn++;
        e.rd   = w[11:7];
        e.data = ref_exec(op, rm, srf[w[19:15]], srf[w[24:20]], fl);
        e.fl   = fl;
        e.cyc  = cycle;
        if (fl[1]) n_nv++;
        if (fl[0]) n_nx++;
        srf[e.rd] = e.data;
        expq.push_back(e);
      end
      @(negedge clk);
      instr_valid = 0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
  endtask

  initial begin
    instr_valid = 0; instr = '0; frm = '0; wb_ready = 0;
    for (int i = 0; i < 32; i++) begin
      rf[i] = rand_fp();
      if (i % 3 == 0) rf[i] = {$urandom, $urandom};  // integer payloads
      srf[i] = rf[i];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(4000);
    @(negedge clk);
    throttle = 0;
    while (expq.size() != 0) @(posedge clk);
    check_latency = 1;
    run(200);
    while (expq.size() != 0) @(posedge clk);
    repeat (2) @(posedge clk);
    for (int i = 0; i < 32; i++) begin
      checks++;
      if (rf[i] !== srf[i]) begin
        failures++;
        $display("FAIL final f%0d = %h, expected %h", i, rf[i], srf[i]);
      end
    end
    for (int i = 1; i < 9; i++) begin
      checks++;
      if (n_op[i] == 0) begin failures++; $display("FAIL operation %0d never executed", i); end
    end
    checks += 6;
    if (n_dyn == 0)       begin failures++; $display("FAIL dynamic rounding never used"); end
    if (n_illegal == 0)   begin failures++; $display("FAIL no illegal instruction"); end
    if (n_raw_stall == 0) begin failures++; $display("FAIL no hazard stall"); end
    if (n_wb_stall == 0)  begin failures++; $display("FAIL no write-port stall"); end
    if (n_nv == 0)        begin failures++; $display("FAIL NV never raised"); end
    if (n_nx == 0)        begin failures++; $display("FAIL NX never raised"); end
    $display("ops fcvt.w.d=%0d fcvt.wu.d=%0d fcvt.d.w=%0d fcvt.d.wu=%0d feq=%0d flt=%0d fle=%0d fclass=%0d",
             n_op[1], n_op[2], n_op[3], n_op[4], n_op[5], n_op[6], n_op[7], n_op[8]);
    $display("dyn=%0d illegal=%0d hazard_stall_cycles=%0d wb_stall_cycles=%0d nv=%0d nx=%0d",
             n_dyn, n_illegal, n_raw_stall, n_wb_stall, n_nv, n_nx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
