// tb_addr_map_packetizer: sends OP_PIM, OP_GBLOAD and OP_STORE instructions
// with random back-pressure; a model SRAM answers the reads. Checks each
// packet's command, addressing and data (the right 256-bit sub-word of the
// right SRAM row), and that OP_PIM passes in the cycle it arrives.
module tb_addr_map_packetizer;
  import pimgpt_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, busy, sram_re, out_valid, out_ready = 0;
  instr_t cmd;
  logic [8:0] sram_raddr;
  logic [2047:0] sram_rdata;
  pim_req_t out;
  logic [2047:0] mem [512];
  int checks = 0, failures = 0;
  pim_req_t exp_q [$];
  always #1 clk = ~clk;
  always @(posedge clk) if (sram_re) sram_rdata <= mem[sram_raddr];
  addr_map_packetizer dut (.*);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // output monitor, sampled just before each rising edge
  always begin
    @(negedge clk); #0.5;
    if (out_valid && out_ready) begin
      pim_req_t e;
      e = exp_q.pop_front();
      chk(out.cmd == e.cmd && out.bcast == e.bcast && out.ch == e.ch && out.bank == e.bank &&
          out.row == e.row && out.col == e.col && out.mask == e.mask && out.data == e.data,
          $sformatf("packet cmd %0d col %0d", e.cmd, e.col));
    end
  end
  initial begin
    for (int r = 0; r < 512; r++) for (int l = 0; l < 64; l++) mem[r][32*l +: 32] = $urandom;
    cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      instr_t c;
      pim_req_t e;
      c = '0;
      c.opc = (n % 3 == 0) ? OP_PIM : (n % 3 == 1) ? OP_GBLOAD : OP_STORE;
      c.bcast = 1'($urandom); c.ch = 3'($urandom); c.bank = 4'($urandom);
      c.row = ROW_AW'($urandom); c.col = 6'($urandom % 32); c.len = 7'(1 + $urandom % 8);
      c.cmd = (c.opc == OP_PIM) ? CMD_MAC_AB : CMD_NOP;
      c.tag.addr = 12'($urandom);
      if (c.opc == OP_PIM) begin
        e = '0; e.cmd = CMD_MAC_AB; e.bcast = c.bcast; e.ch = c.ch; e.bank = c.bank; e.row = c.row;
        e.col = c.col; e.mask = '1;
        exp_q.push_back(e);
      end else begin
        for (int k = 0; k < ((c.opc == OP_STORE) ? 1 : int'(c.len)); k++) begin
          int w;
          w = int'(c.tag.addr) + k;
          w = w % 4096;
          e = '0; e.cmd = (c.opc == OP_GBLOAD) ? CMD_WR_GB : CMD_WR; e.bcast = c.bcast; e.ch = c.ch;
          e.bank = c.bank; e.row = c.row; e.col = 6'(int'(c.col) + k); e.mask = '1;
          e.data = mem[w / 8][256 * (w % 8) +: 256];
          exp_q.push_back(e);
        end
      end
      @(negedge clk);
      cmd = c; cmd_valid = 1;
      begin
        logic acc;
        do begin
          out_ready = ($urandom % 3) != 0;
          #0.4;
          acc = cmd_ready;
          if (c.opc == OP_PIM) chk(cmd_ready == out_ready && out_valid, "OP_PIM passes through");
          @(negedge clk);
        end while (!acc);
      end
      cmd_valid = 0;
      while (busy || exp_q.size() > 0) begin
        out_ready = ($urandom % 3) != 0;
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
