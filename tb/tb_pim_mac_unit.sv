// tb_pim_mac_unit: drives random 16-element vector/weight words through the
// MAC unit, several MACs per read, and checks the accumulated result against
// a reference dot product (same adder-tree order, BF16 rounding at each
// step), the one-cycle read latency and the clear-on-read.
module tb_pim_mac_unit;
  import pimgpt_pkg::*;
  import bf16_ref_pkg::*;
  logic clk = 0, rst_n = 0, mac_en = 0, rd_en = 0;
  logic [255:0] vec, wgt;
  bf16_t result;
  logic result_valid;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  pim_mac_unit dut (.*);

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [15:0] acc;
    vec = '0; wgt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int nm;
      nm  = 1 + (t % 4);
      acc = 16'h0000;
      for (int k = 0; k < nm; k++) begin
        for (int i = 0; i < 16; i++) begin
          vec[16*i +: 16] = rnd(122, 130);
          wgt[16*i +: 16] = rnd(122, 130);
        end
        acc = fadd(acc, dot16(vec, wgt));
        @(negedge clk); mac_en = 1;
        @(negedge clk); mac_en = 0;
      end
      rd_en = 1;
      @(negedge clk); rd_en = 0;
      checks++;
      if (!result_valid || result !== acc) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d got %h valid %b exp %h", t, result, result_valid, acc);
      end
      @(negedge clk);
      checks++;
      if (result_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
