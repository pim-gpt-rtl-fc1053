// tb_dram_bank: opens rows, writes masked lanes, reads them back through the
// row buffer, closes and reopens rows, and checks the data survives and that
// is_open/open_row follow ACT and PRE.
module tb_dram_bank;
  import pimgpt_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0, rst_n = 0, act = 0, pre = 0, wr = 0, is_open;
  logic [3:0] act_row, open_row;
  logic [5:0] rd_col = 0, wr_col = 0;
  logic [15:0] wr_mask = 0;
  logic [255:0] wr_data = 0, rd_data;
  logic [255:0] model [ROWS][64];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  dram_bank #(.ROWS(ROWS)) dut (.*);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    act_row = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(!is_open, "closed after reset");
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); act = 1; act_row = 4'(r);
      @(negedge clk); act = 0;
      chk(is_open && open_row == 4'(r), "open after ACT");
      for (int c = 0; c < 64; c++) begin
        wr = 1; wr_col = 6'(c); wr_mask = '1;
        for (int l = 0; l < 8; l++) wr_data[32*l +: 32] = $urandom;
        model[r][c] = wr_data;
        @(negedge clk);
      end
      wr = 0;
      // masked overwrite of a few lanes
      for (int k = 0; k < 8; k++) begin
        int c;
        c = $urandom % 64;
        wr = 1; wr_col = 6'(c); wr_mask = 16'($urandom);
        for (int l = 0; l < 8; l++) wr_data[32*l +: 32] = $urandom;
        for (int l = 0; l < 16; l++) if (wr_mask[l]) model[r][c][16*l +: 16] = wr_data[16*l +: 16];
        @(negedge clk);
      end
      wr = 0;
      pre = 1; @(negedge clk); pre = 0;
      chk(!is_open, "closed after PRE");
    end
    for (int r = ROWS - 1; r >= 0; r--) begin
      act = 1; act_row = 4'(r); @(negedge clk); act = 0;
      for (int c = 0; c < 64; c++) begin
        rd_col = 6'(c); #0.5;
        chk(rd_data === model[r][c], $sformatf("read r%0d c%0d", r, c));
        @(negedge clk);
      end
      pre = 1; @(negedge clk); pre = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
