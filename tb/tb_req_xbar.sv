// tb_req_xbar: random unicast and broadcast packets with random channel
// readiness. Checks every packet reaches exactly its target channel(s), in
// order, once each.
module tb_req_xbar;
  import pimgpt_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready;
  pim_req_t in;
  logic [7:0] out_valid, out_ready;
  pim_req_t out [8];
  int checks = 0, failures = 0, sent = 0, bc = 0;
  int exp_q [8][$];
  logic tk;
  always #1 clk = ~clk;
  req_xbar dut (.*);

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic monitor();
    for (int c = 0; c < 8; c++) if (out_valid[c] && out_ready[c]) begin
      checks++;
      if (exp_q[c].size() == 0 || int'(out[c].row) != exp_q[c][0]) begin
        failures++; if (failures < 10) $display("FAIL ch %0d got %0d", c, out[c].row);
      end
      if (exp_q[c].size() > 0) void'(exp_q[c].pop_front());
    end
  endtask
  initial begin
    in = '0; out_ready = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    tk = 0;
    while (sent < 2000 || (in_valid && !tk)) begin
      @(negedge clk);
      if (tk) in_valid = 0;
      out_ready = 8'($urandom);
      if (!in_valid && sent < 2000) begin
        in.bcast = ($urandom % 3) == 0;
        in.ch = 3'($urandom);
        in.row = ROW_AW'(sent);
        in_valid = 1;
        for (int c = 0; c < 8; c++) if (in.bcast || in.ch == 3'(c)) exp_q[c].push_back(sent);
        if (in.bcast) bc++;
        sent++;
      end
      #0.5;
      monitor();
      tk = in_ready;
    end
    @(negedge clk);
    in_valid = 0;
    out_ready = '1;
    repeat (5) begin @(negedge clk); #0.5; monitor(); end
    for (int c = 0; c < 8; c++) begin checks++; if (exp_q[c].size() != 0) failures++; end
    checks++; if (bc == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
