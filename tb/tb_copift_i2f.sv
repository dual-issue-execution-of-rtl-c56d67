// tb_copift_i2f: checks fcvt.d.w / fcvt.d.wu on directed edge values and
// random 32-bit integers against the simulator's own integer-to-real
// conversion. The upper half of the FP register operand is filled with
// random bits, which the conversion must ignore.
module tb_copift_i2f;
  import copift_pkg::*;
  import copift_ref_pkg::*;

  logic [63:0] a, res;
  logic        uns;
  int checks = 0, failures = 0;

  copift_i2f dut (.a_i(a), .unsigned_i(uns), .res_o(res));

  task automatic check(input logic [31:0] v, input bit u);
    logic [63:0] exp_res;
    a = {$urandom, v}; uns = u;
    #1;
    exp_res = ref_i2f({32'd0, v}, u);
    checks++;
    if (res !== exp_res) begin
      failures++;
      if (failures < 10) $display("FAIL v=%h u=%0d got %h exp %h", v, u, res, exp_res);
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
    logic [31:0] edges [6] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h8000_0000, 32'h7fff_ffff, 32'h0000_0300};
    foreach (edges[i]) begin
      check(edges[i], 1'b0);
      check(edges[i], 1'b1);
    end
    for (int n = 0; n < 5000; n++) begin
      logic [31:0] v;
      v = $urandom >> $urandom_range(0, 31);
      check(v, 1'b0);
      check(v, 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
