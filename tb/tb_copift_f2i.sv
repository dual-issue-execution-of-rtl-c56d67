// tb_copift_f2i: checks fcvt.w.d / fcvt.wu.d in all five static rounding
// modes against a real-arithmetic reference, including NaN, infinities,
// zeros, subnormals, exact ties and values at the edges of the int32 and
// uint32 ranges. Combinational block: one vector per 1 ns step.
module tb_copift_f2i;
  import copift_pkg::*;
  import copift_ref_pkg::*;

  logic [63:0] a;
  rm_e         rm;
  logic        uns;
  logic [31:0] res;
  fflags_t     flags;
  int checks = 0, failures = 0;

  copift_f2i dut (.a_i(a), .rm_i(rm), .unsigned_i(uns), .res_o(res), .flags_o(flags));

  task automatic check(input logic [63:0] val, input int mode, input bit u);
    logic [63:0] exp_res;
    logic [1:0]  exp_fl;
    a = val; rm = rm_e'(mode); uns = u;
    #1;
    exp_res = ref_f2i(val, mode, u, exp_fl);
    checks++;
    if (res !== exp_res[31:0] || {flags.nv, flags.nx} !== exp_fl ||
        flags.dz || flags.of || flags.uf) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%h (%g) rm=%0d u=%0d got %h nv/nx=%b%b exp %h %b",
                 val, $bitstoreal(val), mode, u, res, flags.nv, flags.nx, exp_res[31:0], exp_fl);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed cases
    check($realtobits(2.5), 0, 0);   // tie to even -> 2
    check($realtobits(3.5), 0, 0);   // tie to even -> 4
    check($realtobits(-2.5), 4, 0);  // ties away -> -3
    check($realtobits(-0.3), 1, 1);  // unsigned, rounds to 0, NX only
    check($realtobits(-1.0), 1, 1);  // unsigned, invalid
    check($realtobits(4294967295.0), 0, 1);
    check($realtobits(-2147483648.0), 0, 0);
    check(64'h7ff8_0000_0000_0000, 0, 0);
    for (int n = 0; n < 4000; n++) begin
      logic [63:0] v;
      v = rand_fp();
      for (int m = 0; m < 5; m++) begin
        check(v, m, 1'b0);
        check(v, m, 1'b1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
