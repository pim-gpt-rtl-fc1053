// tb_bf16_mul: random and directed checks of the BF16 multiplier against an
// exact real-number reference rounded to nearest even.
module tb_bf16_mul;
  import bf16_ref_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;
  bf16_mul dut (.a, .b, .y);

  task automatic check(input logic [15:0] x, input logic [15:0] z);
    logic [15:0] exp_y;
    a = x; b = z; #1;
    exp_y = r2b(b2r(x) * b2r(z));
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h exp %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    check(16'h3F80, 16'h4040);  // 1 * 3
    check(16'h4000, 16'hC000);  // 2 * -2
    check(16'h3FC0, 16'h3FC0);  // 1.5 * 1.5 = 2.25
    for (int i = 0; i < 20000; i++) check(rnd(100, 150), rnd(100, 150));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
