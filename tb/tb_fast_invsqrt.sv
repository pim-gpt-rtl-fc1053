// tb_fast_invsqrt: random positive BF16 inputs over a wide exponent range,
// one per cycle; checks 1/sqrt(d) to within 1 % and the 3-cycle
// latency.
module tb_fast_invsqrt;
  import pimgpt_pkg::*;
  import bf16_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  bf16_t d = 0, y;
  int checks = 0, failures = 0, cyc = 0;
  real want_q [$];
  int  sent_q [$];
  always #1 clk = ~clk;
  fast_invsqrt dut (.*);
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (rst_n && out_valid) begin
    real w;
    w = want_q.pop_front();
    checks += 2;
    if (cyc - sent_q.pop_front() != 3) begin failures++; $display("FAIL latency"); end
    if (relerr(y, w) > 0.01) begin failures++; if (failures < 10) $display("FAIL got %f want %f", b2r(y), w); end
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      d = rnd(90, 160); d[15] = 1'b0;
      if (in_valid) begin want_q.push_back(1.0 / $sqrt(b2r(d))); sent_q.push_back(cyc); end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    checks++; if (want_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
