// tb_rsp_xbar: every channel offers a stream of numbered responses; checks
// each arrives once, in per-channel order, and that with all channels busy
// the grants rotate (no channel is granted twice while another waits).
module tb_rsp_xbar;
  import pimgpt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] in_valid, in_ready;
  pim_rsp_t in [8];
  logic out_valid, out_ready;
  pim_rsp_t out;
  int checks = 0, failures = 0;
  int nxt_send [8], nxt_recv [8];
  logic [7:0] waited;
  always #1 clk = ~clk;
  rsp_xbar dut (.*);

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always_comb for (int c = 0; c < 8; c++) begin
    in[c] = '0; in[c].ch = 3'(c); in[c].data = 256'(nxt_send[c]);
  end
  initial begin
    in_valid = '0; out_ready = 0; waited = '0;
    for (int c = 0; c < 8; c++) begin nxt_send[c] = 0; nxt_recv[c] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      for (int c = 0; c < 8; c++) if (!in_valid[c] || in_ready[c]) in_valid[c] = (i < 2000) ? 1'($urandom) : 1'b1;
      out_ready = (i % 7) != 0;
      #0.5;
      if (out_valid && out_ready) begin
        int c;
        c = int'(out.ch);
        checks++;
        if (int'(out.data) != nxt_recv[c] || !in_ready[c]) begin failures++; if (failures < 10) $display("FAIL ch %0d", c); end
        nxt_recv[c]++;
        // fairness: a channel granted again while another valid one was waiting
        if (i >= 2000) begin
          checks++;
          if (waited[c]) begin failures++; if (failures < 10) $display("FAIL unfair ch %0d", c); end
          waited = waited | (in_valid & ~in_ready);
          waited[c] = 1'b1;
          if ((waited & in_valid) == in_valid) waited = '0;
        end
      end
      @(posedge clk);
      for (int c = 0; c < 8; c++) if (in_valid[c] && in_ready[c]) nxt_send[c]++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
