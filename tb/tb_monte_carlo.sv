// tb_monte_carlo: the FP-side COPIFT steps of the hit-and-miss Monte Carlo
// kernels (pi and polynomial integration, with an LCG or a xoshiro128+
// pseudo-random number generator), run through copift_top.
//
// For every sample the integer thread (modelled here) produces two 32-bit
// random numbers and places them in FP registers f1 and f2, as a stream
// register would. The FP thread then issues, through the block under test,
// fcvt.d.wu f3,f1 and fcvt.d.wu f4,f2 (custom-1 copies), scales them to
// [0,1) and evaluates the integrand with ordinary FP arithmetic (modelled
// here, it is the FPU's job), and issues flt.d f7,f5,f6 (custom-1 copy),
// which leaves the hit bit in f7 without touching the integer register
// file. The integer side sums the hit bits. For each kernel the hit count
// must equal one computed entirely with real arithmetic from the same
// random numbers, and the estimate must be near the exact integral
// (pi/4 for the quarter circle, 11/30 for the polynomial).
//
// The polynomial, p(x) = 0.2 + 0.5 x^2 (integral over [0,1] 11/30), and
// the generator constants are this testbench's own choice.
module tb_monte_carlo;
  import copift_pkg::*;
  import copift_ref_pkg::*;

  localparam int NSAMPLES = 2000;

  logic              clk = 0, rst_n = 0;
  logic              instr_valid, instr_ready, illegal;
  logic [31:0]       instr;
  logic [1:0][4:0]   raddr;
  logic [1:0][63:0]  rdata;
  logic              wb_valid, wb_ready;
  logic [4:0]        wb_addr;
  logic [63:0]       wb_data;
  fflags_t           fflags;
  logic [63:0]       rf [32];
  int checks = 0, failures = 0, n_copift = 0;

  copift_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_ready_o(instr_ready), .instr_i(instr),
    .illegal_o(illegal), .frm_i(3'b000),
    .rf_raddr_o(raddr), .rf_rdata_i(rdata),
    .wb_valid_o(wb_valid), .wb_ready_i(wb_ready), .wb_addr_o(wb_addr), .wb_data_o(wb_data),
    .fflags_o(fflags)
  );

  always #5 clk = ~clk;
  assign rdata[0] = rf[raddr[0]];
  assign rdata[1] = rf[raddr[1]];
  assign wb_ready = 1'b1;
  always @(posedge clk) if (rst_n && wb_valid && wb_ready) rf[wb_addr] <= wb_data;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Offload one instruction and wait until its result is in the register file.
  task automatic issue(input logic [31:0] w);
    @(negedge clk);
    instr = w; instr_valid = 1;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    if (illegal) begin failures++; $display("FAIL %h flagged illegal", w); end
    @(negedge clk);
    instr_valid = 0;
    while (wb_valid) @(negedge clk);
    n_copift++;
  endtask

  // pseudo-random number generators
  logic [31:0] lcg_state;
  logic [31:0] xs [4];
  function automatic logic [31:0] rotl(input logic [31:0] x, input int k);
    return (x << k) | (x >> (32 - k));
  endfunction
  function automatic logic [31:0] next_rand(input bit xoshiro);
    logic [31:0] r, t;
    if (!xoshiro) begin
      lcg_state = lcg_state * 32'd1664525 + 32'd1013904223;
      return lcg_state;
    end
    r = xs[0] + xs[3];
    t = xs[1] << 9;
    xs[2] ^= xs[0]; xs[3] ^= xs[1]; xs[1] ^= xs[2]; xs[0] ^= xs[3];
    xs[2] ^= t;     xs[3] = rotl(xs[3], 11);
    return r;
  endfunction

  function automatic real integrand_gap(input bit poly, input real x, input real y, output real bound);
    // returns the left operand of the comparison, bound the right one
    if (poly) begin bound = 0.2 + 0.5 * x * x; return y; end
    bound = 1.0;
    return x * x + y * y;
  endfunction

  task automatic run_kernel(input bit poly, input bit xoshiro, input string name);
    int hits = 0, hits_ref = 0;
    real scale, x, y, lhs, rhs, xr, yr, lr, rr, est, exact;
    logic [31:0] r1, r2;
    scale = 1.0 / 4294967296.0;
    lcg_state = 32'd42;
    xs[0] = 32'h1; xs[1] = 32'h2; xs[2] = 32'h3; xs[3] = 32'h4;
    for (int i = 0; i < NSAMPLES; i++) begin
      r1 = next_rand(xoshiro);
      r2 = next_rand(xoshiro);
      rf[1] = {32'd0, r1};
      rf[2] = {32'd0, r2};
      issue(enc(7'h69, 5'd1, 5'd1, 3'b000, 5'd3));   // fcvt.d.wu f3, f1
      issue(enc(7'h69, 5'd1, 5'd2, 3'b000, 5'd4));   // fcvt.d.wu f4, f2
      x = $bitstoreal(rf[3]) * scale;                // FPU: fmul
      y = $bitstoreal(rf[4]) * scale;
      lhs = integrand_gap(poly, x, y, rhs);          // FPU: fmadd etc.
      rf[5] = $realtobits(lhs);
      rf[6] = $realtobits(rhs);
      issue(enc(7'h51, 5'd6, 5'd5, 3'b001, 5'd7));   // flt.d f7, f5, f6
      hits += int'(rf[7][0]);
      checks++;
      if (rf[7][63:1] != '0) begin failures++; $display("FAIL flt.d result %h", rf[7]); end
      // reference, without the block
      xr = real'(longint'({32'd0, r1})) * scale;
      yr = real'(longint'({32'd0, r2})) * scale;
      lr = integrand_gap(poly, xr, yr, rr);
      if (lr < rr) hits_ref++;
    end
    est   = real'(hits) / real'(NSAMPLES);
    exact = poly ? (0.2 + 0.5 / 3.0) : (3.14159265358979 / 4.0);
    checks += 2;
    if (hits != hits_ref) begin failures++; $display("FAIL %s hits %0d, reference %0d", name, hits, hits_ref); end
    if (est - exact > 0.05 || exact - est > 0.05) begin
      failures++; $display("FAIL %s estimate %f far from %f", name, est, exact);
    end
    $display("%s: %0d samples, %0d hits, estimate %f (exact %f)%s", name, NSAMPLES, hits,
             poly ? est : 4.0 * est, poly ? exact : 4.0 * exact, poly ? "" : " for pi");
  endtask

  initial begin
    instr_valid = 0; instr = '0;
    foreach (rf[i]) rf[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_kernel(1'b0, 1'b0, "pi_lcg");
    run_kernel(1'b1, 1'b0, "poly_lcg");
    run_kernel(1'b0, 1'b1, "pi_xoshiro128p");
    run_kernel(1'b1, 1'b1, "poly_xoshiro128p");
    $display("COPIFT instructions executed: %0d", n_copift);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
