// tb_copift_fcmp: checks feq.d, flt.d and fle.d, result and NV flag, on
// random operand pairs (with a share of equal pairs, signed zeros, NaNs and
// infinities) against real comparisons of the simulator.
module tb_copift_fcmp;
  import copift_pkg::*;
  import copift_ref_pkg::*;

  logic [63:0] a, b;
  copift_op_e  op;
  logic        res;
  fflags_t     flags;
  int checks = 0, failures = 0;
  localparam copift_op_e OPS [3] = '{OP_FEQ_D, OP_FLT_D, OP_FLE_D};

  copift_fcmp dut (.a_i(a), .b_i(b), .op_i(op), .res_o(res), .flags_o(flags));

  task automatic check(input logic [63:0] x, input logic [63:0] y, input int k);
    logic [63:0] exp_res;
    logic [1:0]  exp_fl;
    a = x; b = y; op = OPS[k];
    #1;
    exp_res = ref_cmp(x, y, k, exp_fl);
    checks++;
    if (res !== exp_res[0] || {flags.nv, flags.nx} !== exp_fl || flags.of || flags.uf || flags.dz) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h op=%0d got %b/%b exp %b/%b",
                                  x, y, k, res, flags.nv, exp_res[0], exp_fl[1]);
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
    for (int k = 0; k < 3; k++) begin
      check(64'h0, 64'h8000_0000_0000_0000, k);           // +0 vs -0
      check($realtobits(-1.0), $realtobits(1.0), k);
      check($realtobits(-2.0), $realtobits(-1.0), k);
      check($realtobits(1.0), $realtobits(1.0), k);
    end
    for (int n = 0; n < 6000; n++) begin
      logic [63:0] x, y;
      x = rand_fp();
      case ($urandom_range(0, 3))
        0: y = x;
        1: y = x ^ 64'($urandom_range(0, 3));
        2: y = {~x[63], x[62:0]};
        default: y = rand_fp();
      endcase
      for (int k = 0; k < 3; k++) begin
        check(x, y, k);
        check(y, x, k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
