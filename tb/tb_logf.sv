// tb_logf: the COPIFT step of a table-based single-precision logarithm,
// run through copift_top.
//
// The algorithm is the usual table-driven one: with OFF = 0x3f330000, the
// integer thread computes tmp = ix - OFF from the input bits ix, the table
// index i = (tmp >> 19) mod 16, the exponent k = tmp >>> 23 and the reduced
// argument bits iz = ix - (tmp & 0xff800000). It hands k to the FP thread
// through an FP register, where the custom-1 copy of fcvt.d.w converts it
// to binary64 inside the FP register file (the block under test). The FP
// thread (modelled here with real arithmetic) then forms
// r = z / c_i - 1 and log(x) = log(c_i) + k ln2 + r - r^2/2 + r^3/3 - r^4/4.
// The table is computed here rather than stored: c_i is the centre of the
// i-th of 16 sub-intervals of [0x3f330000, 2 x 0x3f330000), and log(c_i)
// comes from $ln. Every converted k must be exact, and every result must
// match $ln(x) to 1e-7 relative.
module tb_logf;
  import copift_pkg::*;
  import copift_ref_pkg::*;

  localparam int NSAMPLES = 3000;
  localparam logic [31:0] OFF = 32'h3f33_0000;

  logic              clk = 0, rst_n = 0;
  logic              instr_valid, instr_ready, illegal;
  logic [31:0]       instr;
  logic [1:0][4:0]   raddr;
  logic [1:0][63:0]  rdata;
  logic              wb_valid;
  logic [4:0]        wb_addr;
  logic [63:0]       wb_data;
  fflags_t           fflags;
  logic [63:0]       rf [32];
  int checks = 0, failures = 0;

  copift_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_ready_o(instr_ready), .instr_i(instr),
    .illegal_o(illegal), .frm_i(3'b000),
    .rf_raddr_o(raddr), .rf_rdata_i(rdata),
    .wb_valid_o(wb_valid), .wb_ready_i(1'b1), .wb_addr_o(wb_addr), .wb_data_o(wb_data),
    .fflags_o(fflags)
  );

  always #5 clk = ~clk;
  assign rdata[0] = rf[raddr[0]];
  assign rdata[1] = rf[raddr[1]];
  always @(posedge clk) if (rst_n && wb_valid) rf[wb_addr] <= wb_data;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // value of a normal binary32 bit pattern
  function automatic real f32(input logic [31:0] b);
    real m;
    int  e;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    e = int'(b[30:23]) - 127;
    for (int j = 0; j < e; j++) m = m * 2.0;
    for (int j = 0; j > e; j--) m = m / 2.0;
    return b[31] ? -m : m;
  endfunction

  task automatic issue(input logic [31:0] w);
    @(negedge clk);
    instr = w; instr_valid = 1;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    if (illegal) begin failures++; $display("FAIL %h flagged illegal", w); end
    @(negedge clk);
    instr_valid = 0;
    while (wb_valid) @(negedge clk);
  endtask

  initial begin
    real worst = 0.0;
    instr_valid = 0; instr = '0;
    foreach (rf[j]) rf[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NSAMPLES; n++) begin
      logic [31:0] ix, tmp, iz;
      int          i, k;
      real x, z, c, r, r2, kd, y, ref_y, err;
      ix  = {1'b0, 8'($urandom_range(1, 254)), 23'($urandom)};
      x   = f32(ix);
      // integer thread
      tmp = ix - OFF;
      i   = int'((tmp >> 19) % 16);
      k   = $signed(tmp) >>> 23;
      iz  = ix - (tmp & 32'hff80_0000);
      rf[1] = {32'd0, 32'(k)};
      // FP thread: the COPIFT conversion
      issue(enc(7'h69, 5'd0, 5'd1, 3'b000, 5'd2));    // fcvt.d.w f2, f1
      kd = $bitstoreal(rf[2]);
      checks++;
      if (kd != real'(k)) begin failures++; $display("FAIL k=%0d converted to %f", k, kd); end
      // FP thread: table lookup and polynomial (FPU arithmetic)
      z  = f32(iz);
      c  = f32(OFF + (32'(i) << 19) + (32'd1 << 18));
      r  = z / c - 1.0;
      r2 = r * r;
      y  = ((-0.25 * r + 1.0 / 3.0) * r - 0.5) * r2 + r + ($ln(c) + kd * 0.6931471805599453);
      ref_y = $ln(x);
      err = (y - ref_y) / ((ref_y > 1.0 || ref_y < -1.0) ? ref_y : 1.0);
      if (err < 0.0) err = -err;
      if (err > worst) worst = err;
      checks++;
      if (err > 1.0e-7) begin failures++; $display("FAIL logf(%g) = %g, expected %g", x, y, ref_y); end
    end
    $display("logf: %0d inputs, worst relative error %g", NSAMPLES, worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
