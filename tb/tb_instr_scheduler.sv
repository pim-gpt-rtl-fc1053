// tb_instr_scheduler: loads a random program of PIM commands (broadcast and
// unicast reads among them), copies, engine operations, scalar sets and
// waits, with models of the packetizer (random ready), the engine (busy for
// a random time) and the read path (responses consumed after a delay).
// Checks: instructions reach the right unit in program order; reads never
// exceed the outstanding limit; an engine operation or scalar set never
// starts while reads are outstanding or the engine is busy; OP_WAIT holds
// until all reads returned; done after OP_HALT; stalls are counted.
module tb_instr_scheduler;
  import pimgpt_pkg::*;
  localparam int MAXO = 16, N = 200;
  logic clk = 0, rst_n = 0, imem_we = 0, start = 0, done, running;
  logic [9:0] imem_addr = 0;
  instr_t imem_wdata;
  logic am_valid, am_ready, am_busy = 0, eng_start, eng_busy, sets_we;
  instr_t am_instr;
  vop_t eng_vop;
  logic [2:0] sets_idx;
  bf16_t sets_val;
  logic rsp_consumed, queues_empty;
  logic [31:0] stall_cycles, issued;
  instr_t prog [N];
  int checks = 0, failures = 0, nxt = 0, outst = 0, eng_cnt = 0, pend = 0, waits_held = 0;
  always #1 clk = ~clk;
  instr_scheduler #(.MAX_OUT(MAXO)) dut (.*);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  assign eng_busy = (eng_cnt != 0);
  assign queues_empty = (outst == 0);
  assign rsp_consumed = (outst > 0) && (pend == 0);

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) am_ready = ($urandom % 3) != 0;
  // check at the clock edge what the scheduler issues
  always @(posedge clk) if (rst_n) begin
    if ((am_valid && am_ready) || eng_start || sets_we) begin
      instr_t e;
      e = prog[nxt];
      chk(nxt < N, "beyond program");
      if (am_valid) chk(am_instr == e && e.opc inside {OP_PIM, OP_GBLOAD, OP_STORE}, $sformatf("packetizer instr %0d", nxt));
      if (eng_start || sets_we) begin
        chk(outst == 0 && !eng_busy, "engine op with reads outstanding or engine busy");
        chk((eng_start && e.opc == OP_VOP && eng_vop == e.vop) || (sets_we && e.opc == OP_SETS && sets_val == e.imm),
            $sformatf("engine instr %0d", nxt));
      end
      nxt++;
      while (nxt < N && prog[nxt].opc inside {OP_WAIT, OP_HALT}) nxt++;
    end
    if (am_valid && am_ready && am_instr.opc == OP_PIM && am_instr.cmd inside {CMD_RD, CMD_RD_MAC})
      outst += am_instr.bcast ? 8 : 1;
    if (rsp_consumed) outst--;
    chk(outst <= MAXO, "outstanding limit");
    pend = (pend == 0) ? int'($urandom % 4) : pend - 1;
    if (eng_start) eng_cnt = 1 + $urandom % 10;
    else if (eng_cnt > 0) eng_cnt--;
    if (dut.st == 2 && dut.ir.opc == OP_WAIT && outst > 0) waits_held++;
  end

  initial begin
    imem_wdata = '0;
    for (int i = 0; i < N; i++) begin
      instr_t c;
      int k;
      c = '0;
      k = $urandom % 10;
      c.opc = (k < 5) ? OP_PIM : (k == 5) ? OP_GBLOAD : (k == 6) ? OP_VOP : (k == 7) ? OP_SETS : (k == 8) ? OP_WAIT : OP_STORE;
      if (c.opc == OP_PIM) begin
        c.cmd = (k < 3) ? CMD_RD_MAC : CMD_MAC_AB;
        c.bcast = 1'($urandom);
      end
      c.vop.op = V_ADD; c.vop.n = 16'($urandom); c.imm = 16'($urandom); c.vop.sd = 3'($urandom);
      c.row = ROW_AW'(i);
      if (i == N - 1) c.opc = OP_HALT;
      prog[i] = c;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); imem_we = 1; imem_addr = 10'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk(nxt == N, $sformatf("all issued %0d", nxt));
    chk(stall_cycles > 0, "stalls counted");
    chk(waits_held > 0, "OP_WAIT held");
    $display("stall_cycles=%0d waits_held=%0d", stall_cycles, waits_held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
