// tb_copift_unit: drives random requests of all eight operations into the
// execution unit with random request gaps and random write-port
// back-pressure, and compares every result (register, value, flags) in
// order against the reference model. A second phase with no gaps and no
// back-pressure checks the one-cycle latency and one-per-cycle throughput:
// N back-to-back requests must complete in N + 1 cycles.
module tb_copift_unit;
  import copift_pkg::*;
  import copift_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        req_valid, req_ready, rsp_valid, rsp_ready;
  copift_req_t req;
  copift_rsp_t rsp;
  int checks = 0, failures = 0, stalls = 0, cycle = 0;
  bit throttle = 1;
  copift_rsp_t expq [$];
  localparam copift_op_e OPS [8] = '{OP_FCVT_W_D, OP_FCVT_WU_D, OP_FCVT_D_W, OP_FCVT_D_WU,
                                     OP_FEQ_D, OP_FLT_D, OP_FLE_D, OP_FCLASS_D};

  copift_unit dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
                   .req_i(req), .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_o(rsp));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic new_req();
    logic [1:0] fl;
    copift_rsp_t e;
    req.op = OPS[$urandom_range(0, 7)];
    req.rm = rm_e'($urandom_range(0, 4));
    req.rd = 5'($urandom);
    req.a  = (req.op inside {OP_FCVT_D_W, OP_FCVT_D_WU}) ? {$urandom, $urandom} : rand_fp();
    req.b  = ($urandom_range(0, 3) == 0) ? req.a : rand_fp();
  endtask

  // expected result of the request currently presented
  function automatic copift_rsp_t expect_of(input copift_req_t r);
    copift_rsp_t e;
    logic [1:0] fl;
    e = '0;
    e.rd = r.rd;
    e.data = ref_exec(r.op, int'(r.rm), r.a, r.b, fl);
    e.flags.nv = fl[1];
    e.flags.nx = fl[0];
    return e;
  endfunction

  // response checker
  always @(posedge clk) begin
    if (rst_n && rsp_valid && rsp_ready) begin
      copift_rsp_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected response");
      end else begin
        e = expq.pop_front();
        if (rsp !== e) begin
          failures++;
          if (failures < 10) $display("FAIL got rd=%0d %h %b exp rd=%0d %h %b",
                                      rsp.rd, rsp.data, rsp.flags, e.rd, e.data, e.flags);
        end
      end
    end
    if (rst_n && rsp_valid && !rsp_ready) stalls++;
  end

  // write-port back-pressure
  always @(negedge clk) rsp_ready <= throttle ? ($urandom_range(0, 2) != 0) : 1'b1;

  initial begin
    int t0, n;
    req_valid = 0;
    req = '0;
    rsp_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: random traffic
    n = 0;
    while (n < 3000) begin
      @(negedge clk);
      if (!req_valid || req_ready_q) begin
        if ($urandom_range(0, 3) != 0) begin
          new_req();
          req_valid = 1;
        end else req_valid = 0;
      end
      @(posedge clk);
      if (req_valid && req_ready) begin
        expq.push_back(expect_of(req));
        n++;
      end
      req_ready_q = req_ready;
    end
    @(negedge clk);
    req_valid = 0;
    throttle = 0;
    repeat (4) @(posedge clk);
    // phase 2: back-to-back, no back-pressure
    @(negedge clk);
    t0 = cycle;
    for (int i = 0; i < 64; i++) begin
      new_req();
      req_valid = 1;
      @(posedge clk);
      checks++;
      if (!req_ready) begin failures++; $display("FAIL unit not ready in streaming phase"); end
      expq.push_back(expect_of(req));
      @(negedge clk);
    end
    req_valid = 0;
    while (expq.size() != 0) @(posedge clk);
    checks++;
    if (cycle - t0 != 65) begin
      failures++;
      $display("FAIL 64 back-to-back requests took %0d cycles, expected 65", cycle - t0);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL back-pressure never exercised"); end
    $display("back-pressure stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic req_ready_q = 1'b1;
endmodule
