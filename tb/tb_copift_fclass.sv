// tb_copift_fclass: checks the fclass.d class mask on directed values of
// all ten classes and on random operands, against a classification made
// with real arithmetic.
module tb_copift_fclass;
  import copift_pkg::*;
  import copift_ref_pkg::*;

  logic [63:0] a;
  logic [9:0]  res;
  int checks = 0, failures = 0;
  int seen [10];

  copift_fclass dut (.a_i(a), .res_o(res));

  task automatic check(input logic [63:0] x);
    logic [63:0] exp_res;
    a = x;
    #1;
    exp_res = ref_class(x);
    checks++;
    for (int i = 0; i < 10; i++) if (exp_res[i]) seen[i]++;
    if (64'(res) !== exp_res) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h got %b exp %b", x, res, exp_res[9:0]);
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
    check(64'hfff0_0000_0000_0000);
    check($realtobits(-3.0));
    check(64'h800f_0000_0000_0001);
    check(64'h8000_0000_0000_0000);
    check(64'h0);
    check(64'h0000_0000_0000_0001);
    check($realtobits(3.0));
    check(64'h7ff0_0000_0000_0000);
    check(64'h7ff0_0000_0000_0001);
    check(64'h7ff8_0000_0000_0000);
    for (int n = 0; n < 5000; n++) check(rand_fp());
    for (int i = 0; i < 10; i++) begin
      checks++;
      if (seen[i] == 0) begin
        failures++;
        $display("class %0d never exercised", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
