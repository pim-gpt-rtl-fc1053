// tb_bf16_add: random and directed checks of the BF16 adder against an exact
// real-number reference rounded to nearest even.
module tb_bf16_add;
  import bf16_ref_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;
  bf16_add dut (.a, .b, .y);

  task automatic check(input logic [15:0] x, input logic [15:0] z);
    logic [15:0] exp_y;
    a = x; b = z; #1;
    exp_y = r2b(b2r(x) + b2r(z));
    if (exp_y == 16'h8000) exp_y = 16'h0000;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h exp %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    check(16'h3F80, 16'h3F80);  // 1 + 1 = 2
    check(16'h3F80, 16'hBF80);  // 1 - 1 = 0
    check(16'h4040, 16'hBF80);  // 3 - 1 = 2
    check(16'h3F80, 16'h3B80);  // 1 + 2^-8 : tie, stays 1
    check(16'h3F81, 16'h3B80);  // tie rounds up to even
    check(16'h0000, 16'h4120);
    for (int i = 0; i < 20000; i++) check(rnd(110, 145), rnd(110, 145));
    for (int i = 0; i < 5000; i++) begin  // close magnitudes, heavy cancellation
      logic [15:0] x; x = rnd(120, 130);
      check(x, {~x[15], x[14:7], 7'($urandom)});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
