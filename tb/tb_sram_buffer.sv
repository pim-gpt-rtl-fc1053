// tb_sram_buffer: random word-masked writes and two-port reads of the 128 KB
// SRAM (full size) against a model, with the one-cycle read latency.
module tb_sram_buffer;
  import pimgpt_pkg::*;
  logic clk = 0, rea = 0, reb = 0, we = 0;
  logic [8:0] raddra = 0, raddrb = 0, waddr = 0;
  logic [7:0] wmask = 0;
  logic [2047:0] wdata = 0, rdataa, rdatab;
  logic [2047:0] model [512];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  sram_buffer dut (.*);

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk);
    for (int a = 0; a < 512; a++) begin
      we = 1; waddr = 9'(a); wmask = '1;
      for (int l = 0; l < 64; l++) wdata[32*l +: 32] = $urandom;
      model[a] = wdata;
      @(negedge clk);
    end
    for (int i = 0; i < 4000; i++) begin
      we = 1'($urandom); waddr = 9'($urandom % 16); wmask = 8'($urandom);
      for (int l = 0; l < 64; l++) wdata[32*l +: 32] = $urandom;
      rea = 1; raddra = 9'($urandom % 16); reb = 1; raddrb = 9'($urandom);
      @(negedge clk);
      checks += 2;
      if (rdataa !== model[raddra]) begin failures++; if (failures < 10) $display("FAIL A %0d", raddra); end
      if (rdatab !== model[raddrb]) begin failures++; if (failures < 10) $display("FAIL B %0d", raddrb); end
      if (we) for (int k = 0; k < 8; k++) if (wmask[k]) model[waddr][256*k +: 256] = wdata[256*k +: 256];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
