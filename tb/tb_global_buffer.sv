// tb_global_buffer: random masked writes and reads of the 2 KB buffer against
// a model, checking the one-cycle read latency.
module tb_global_buffer;
  import pimgpt_pkg::*;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [15:0] wmask = 0;
  logic [255:0] wdata = 0, rdata;
  logic [255:0] model [64];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  global_buffer dut (.*);

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk);
    for (int a = 0; a < 64; a++) begin
      we = 1; waddr = 6'(a); wmask = '1;
      for (int l = 0; l < 8; l++) wdata[32*l +: 32] = $urandom;
      model[a] = wdata;
      @(negedge clk);
    end
    for (int i = 0; i < 3000; i++) begin
      we = 1'($urandom); waddr = 6'($urandom); wmask = 16'($urandom);
      for (int l = 0; l < 8; l++) wdata[32*l +: 32] = $urandom;
      re = 1; raddr = 6'($urandom);
      @(negedge clk);
      checks++;
      if (rdata !== model[raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d", raddr);
      end
      if (we) for (int l = 0; l < 16; l++) if (wmask[l]) model[waddr][16*l +: 16] = wdata[16*l +: 16];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
