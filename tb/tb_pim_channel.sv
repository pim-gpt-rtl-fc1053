// tb_pim_channel: end-to-end test of one PIM channel.
// Loads random weights into one row of all 16 banks (ACT, WR), a vector into
// the global buffer (WR_GB), runs MAC_AB over several column words and reads
// the 16 bank results with RD_MAC; also reads a bank word back with RD.
// Checks: MAC results against a reference dot product; RD data; that a column
// command is held until T_RCD cycles after ACT and an ACT until T_RP after
// PRE (stall measured on cmd_ready); that RD data arrives 3 cycles after the
// command; and that a refresh (short T_REFI here) stalls the channel and is
// transparent to the data.
module tb_pim_channel;
  import pimgpt_pkg::*;
  import bf16_ref_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 1, refreshing;
  pim_req_t cmd;
  pim_rsp_t rsp;
  int checks = 0, failures = 0, cyc = 0, refreshes = 0;
  logic [255:0] w [16][64];
  logic [255:0] gb [64];
  always #1 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (refreshing && !$past(refreshing)) refreshes++;
  end
  pim_channel #(.ROWS(ROWS), .TREFI(700), .CH_ID(3'd5)) dut (.*);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // issue a command; returns the cycle it was accepted
  task automatic issue(input pim_req_t c, output int when);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    when = cyc;
    @(negedge clk); cmd_valid = 0;
  endtask

  function automatic pim_req_t mk(pim_cmd_e k, logic ab, int bank, int row, int col);
    pim_req_t c;
    c = '0; c.cmd = k; c.ab = ab; c.bank = 4'(bank); c.row = ROW_AW'(row); c.col = 6'(col);
    c.mask = '1; c.tag.route = RT_SRAM; c.tag.addr = 12'(col);
    return c;
  endfunction

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int t_act, t_wr, t_pre, t_act2, t;
    pim_req_t c;
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    issue(mk(CMD_ACT, 1, 0, 3, 0), t_act);
    for (int b = 0; b < 16; b++)
      for (int k = 0; k < 8; k++) begin
        c = mk(CMD_WR, 0, b, 3, k);
        for (int i = 0; i < 16; i++) c.data[16*i +: 16] = rnd(122, 130);
        w[b][k] = c.data;
        issue(c, t_wr);
        if (b == 0 && k == 0) chk(t_wr - t_act >= T_RCD, $sformatf("tRCD stall %0d", t_wr - t_act));
      end
    for (int rep = 0; rep < 6; rep++) begin
      int ncol;
      ncol = 1 + rep % 4;
      for (int k = 0; k < 8; k++) begin
        c = mk(CMD_WR_GB, 0, 0, 0, k);
        for (int i = 0; i < 16; i++) c.data[16*i +: 16] = rnd(122, 130);
        gb[k] = c.data;
        issue(c, t);
      end
      for (int k = 0; k < ncol; k++) issue(mk(CMD_MAC_AB, 0, 0, 3, k), t);
      issue(mk(CMD_RD_MAC, 0, 0, 0, 9), t);
      while (!rsp_valid) @(posedge clk);
      for (int b = 0; b < 16; b++) begin
        logic [15:0] acc;
        acc = 16'h0000;
        for (int k = 0; k < ncol; k++) acc = fadd(acc, dot16(gb[k], w[b][k]));
        chk(rsp.data[16*b +: 16] == acc, $sformatf("MAC bank %0d got %h exp %h", b, rsp.data[16*b +: 16], acc));
      end
      chk(rsp.ch == 3'd5 && rsp.tag.addr == 12'd9, "tag/ch");
      @(negedge clk);
    end
    // RD latency
    issue(mk(CMD_RD, 0, 7, 3, 2), t);
    begin
      int n;
      n = 0;
      @(negedge clk);
      while (!rsp_valid) begin @(negedge clk); n++; end
      chk(n == 1, $sformatf("RD latency %0d", n));  // valid in the 3rd cycle after the command cycle
      chk(rsp.data == w[7][2], "RD data");
    end
    // tRP: PRE all then ACT
    issue(mk(CMD_PRE, 1, 0, 0, 0), t_pre);
    issue(mk(CMD_ACT, 0, 4, 5, 0), t_act2);
    chk(t_act2 - t_pre >= T_RP, $sformatf("tRP stall %0d", t_act2 - t_pre));
    chk(refreshes > 0, "refresh happened");
    $display("refreshes=%0d", refreshes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
