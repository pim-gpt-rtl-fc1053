// tb_taylor_unit: streams random inputs, one set per cycle, through the
// Taylor unit and checks e^x and tanh(x) against the real functions on the
// range where a six-term series holds (|x| <= 1 for e^x, |x| <= 0.5 for tanh),
// to within 2 %; also checks the 7-cycle latency.
module tb_taylor_unit;
  import pimgpt_pkg::*;
  import bf16_ref_pkg::*;
  localparam int TL = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, is_tanh = 0, out_valid;
  bf16_t x [TL], y [TL];
  int checks = 0, failures = 0, cyc = 0;
  real want_q [$];
  int  sent_q [$];
  always #1 clk = ~clk;
  taylor_unit #(.TL(TL)) dut (.*);

  function automatic real tanh_r(input real v);
    return ($exp(v) - $exp(-v)) / ($exp(v) + $exp(-v));
  endfunction

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (cyc - sent_q.pop_front() != 7) begin failures++; $display("FAIL latency"); end
    for (int l = 0; l < TL; l++) begin
      real w;
      w = want_q.pop_front();
      checks++;
      if (relerr(y[l], w) > 0.02) begin
        failures++;
        if (failures < 10) $display("FAIL got %f want %f", b2r(y[l]), w);
      end
    end
  end
  initial begin
    for (int l = 0; l < TL; l++) x[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      is_tanh  = (i / 50) % 2;
      for (int l = 0; l < TL; l++) begin
        x[l] = is_tanh ? rnd(118, 125) : rnd(118, 126);
        if (in_valid) want_q.push_back(is_tanh ? tanh_r(b2r(x[l])) : $exp(b2r(x[l])));
      end
      if (in_valid) sent_q.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (12) @(negedge clk);
    checks++; if (want_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
