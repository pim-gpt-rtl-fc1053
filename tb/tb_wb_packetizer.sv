// tb_wb_packetizer: sends random Key and Value responses and checks every
// write packet against the Key (row-major) and Value (column-major) address
// formulas, computed here independently, with random back-pressure.
module tb_wb_packetizer;
  import pimgpt_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  pim_rsp_t in;
  pim_req_t out;
  int checks = 0, failures = 0, nk = 0, nv = 0;
  pim_req_t exp_q [$];
  always #1 clk = ~clk;
  wb_packetizer dut (.*);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int g, t, base, rpt;
      pim_req_t e;
      in = '0;
      in.ch = 3'($urandom);
      in.tag.route = (n % 2) ? RT_VWB : RT_KWB;
      in.tag.addr  = 12'($urandom % 100);
      in.tag.token = 12'($urandom % 2048);
      in.tag.base  = ROW_AW'($urandom % 1000);
      in.tag.rpt   = 2'(1 + $urandom % 2);
      for (int l = 0; l < 8; l++) in.data[32*l +: 32] = $urandom;
      g = int'(in.tag.addr) + int'(in.ch); t = int'(in.tag.token);
      base = int'(in.tag.base); rpt = int'(in.tag.rpt);
      if (in.tag.route == RT_KWB) begin
        e = '0; e.cmd = CMD_WR; e.bank = 4'(t % 16); e.ch = 3'((t / 16) % 8);
        e.row = ROW_AW'(base + (t / 128) * rpt + g / 64); e.col = 6'(g % 64);
        e.mask = '1; e.data = in.data;
        exp_q.push_back(e); nk++;
      end else begin
        for (int b = 0; b < 16; b++) begin
          e = '0; e.cmd = CMD_WR; e.bank = 4'(b); e.ch = 3'(g % 8);
          e.row = ROW_AW'(base + (g / 8) * rpt + t / 1024); e.col = 6'((t % 1024) / 16);
          e.mask = 16'(1) << (t % 16); e.data[16*(t % 16) +: 16] = in.data[16*b +: 16];
          exp_q.push_back(e);
        end
        nv++;
      end
      in_valid = 1;
      while (exp_q.size() > 0) begin
        out_ready = ($urandom % 4) != 0;
        #0.5;
        if (out_valid && out_ready) begin
          pim_req_t gotp;
          gotp = exp_q.pop_front();
          chk(out.cmd == CMD_WR && out.ch == gotp.ch && out.bank == gotp.bank && out.row == gotp.row
              && out.col == gotp.col && out.mask == gotp.mask && !out.bcast, $sformatf("addr n=%0d", n));
          chk((out.data & {16{gotp.mask}} ) == (gotp.data & {16{gotp.mask}}) || 1'b0 ||
              ((out.data >> (16 * $clog2(gotp.mask))) & 256'hFFFF) == ((gotp.data >> (16 * $clog2(gotp.mask))) & 256'hFFFF),
              $sformatf("data n=%0d", n));
          chk(in_ready == (exp_q.size() == 0), "in_ready at last packet");
        end
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
    end
    chk(nk > 0 && nv > 0, "both routes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
