// tb_pim_gpt_top: end-to-end test of the whole accelerator (ASIC plus eight
// PIM channels) running the pieces of one GPT decoder step.
//
// The host writes two input vector slices and a weight matrix into the SRAM
// buffer and loads one program into the instruction memory. The program
//  1. copies the weights into two DRAM rows of every bank (OP_STORE),
//  2. broadcasts each input slice into all global buffers (OP_GBLOAD),
//  3. multiplies the weight rows by the slice in all 128 banks at once
//     (MAC_AB) and reads the results back into the SRAM (RD_MAC), once per
//     row: two partial sums of the same output vector;
//  4. issues more reads than the data queue holds, so the outstanding-read
//     limit stalls the scheduler;
//  5. adds the partial sums (V_ADD), then runs Softmax, LayerNorm and GELU on
//     the result with the computation engine (e^x, tanh, sums, reciprocal,
//     inverse square root, scalar and vector operations);
//  6. writes one MAC result back as a Key row and one as a Value column
//     through the write-back packetizer, straight into DRAM.
// The testbench checks the partial sums and their sum bit for bit against a
// BF16 reference (same adder-tree order as the banks), the Softmax,
// LayerNorm and GELU outputs within tolerances against real arithmetic, and
// the written-back Key and Value words in the DRAM banks. It counts how often
// each mechanism happened (refresh, refresh-blocked command, tRCD, tRP and
// tWR stalls, broadcasts, the outstanding-read stall, the engine-busy stall,
// Key and Value write-backs, SRAM writes from the data queue, each engine
// operation) and counts a failure for any that never happened.
// Parameters here are reduced (16 DRAM rows per bank, 32 engine lanes, 8
// Taylor lanes, refresh every 700 cycles) to keep the run short; the program
// itself is the same at any size.
module tb_pim_gpt_top;
  import pimgpt_pkg::*;
  import bf16_ref_pkg::*;
  localparam int unsigned ROWS  = 16;
  localparam int unsigned VLP   = 32;
  localparam int unsigned TLP   = 8;
  localparam int unsigned TREFP = 700;
  localparam int unsigned IMD   = 1024;
  localparam int unsigned NE    = VLP;          // output elements checked
  localparam int unsigned R0 = 2, R1 = 3;       // DRAM rows holding the weights
  localparam int unsigned TV = 323;             // Value write-back token
  localparam int unsigned TK = 5;               // Key write-back token

  logic clk = 0, rst_n = 0;
  logic imem_we = 0, host_we = 0, host_re = 0, start = 0, done;
  logic [$clog2(IMD)-1:0] imem_addr = '0;
  instr_t imem_wdata = '0;
  logic [SROW_AW-1:0] host_addr = '0;
  logic [SROW_W-1:0]  host_wdata = '0, host_rdata;
  logic [31:0] stall_cycles;
  logic [N_CH-1:0] refreshing;
  always #1 clk = ~clk;

  pim_gpt_top #(.ROWS(ROWS), .VL(VLP), .TL(TLP), .IMEM_DEPTH(IMD), .TREFI(TREFP)) dut (
    .clk, .rst_n, .imem_we, .imem_addr, .imem_wdata, .host_we, .host_addr, .host_wdata,
    .host_re, .host_rdata, .start, .done, .stall_cycles, .refreshing);

  int checks = 0, failures = 0;
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  localparam int unsigned WATCHDOG = 200000;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_ref, n_refblk, n_trcd, n_trp, n_twr, n_bcast, n_outst, n_engwait, n_kwb, n_vwb, n_dq2sram, n_store, n_gbl;
  int n_op [11];
  logic [N_CH-1:0] ref_q;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N_CH; c++) if (refreshing[c] && !ref_q[c]) n_ref++;
    ref_q <= refreshing;
    if ((dut.req_valid & refreshing) != '0) n_refblk++;
    if (dut.g_ch[0].u_ch.cmd_valid && !dut.g_ch[0].u_ch.legal) begin
      if (dut.g_ch[0].u_ch.cmd.cmd inside {CMD_MAC_AB, CMD_WR, CMD_RD}) n_trcd++;
      if (dut.g_ch[0].u_ch.cmd.cmd == CMD_ACT) n_trp++;
      if (dut.g_ch[0].u_ch.cmd.cmd == CMD_PRE) n_twr++;
    end
    if (dut.u_asic.rq_out_valid && dut.u_asic.rq_out_ready && dut.u_asic.rq_out.bcast) n_bcast++;
    if (dut.u_asic.u_sched.st == 2'd2 && !dut.u_asic.u_sched.go) begin
      if (dut.u_asic.u_sched.ir.opc == OP_PIM && dut.u_asic.u_sched.nrd != 0) n_outst++;
      if (dut.u_asic.u_sched.ir.opc == OP_VOP) n_engwait++;
    end
    if (dut.u_asic.wbin_valid && dut.u_asic.wbin_ready) begin
      if (dut.u_asic.dq.tag.route == RT_KWB) n_kwb++;
      if (dut.u_asic.dq.tag.route == RT_VWB) n_vwb++;
    end
    if (dut.u_asic.dq_valid && dut.u_asic.dq_ready && dut.u_asic.dq_to_sram) n_dq2sram++;
    if (dut.u_asic.ap_valid && dut.u_asic.ap_ready && dut.u_asic.ap_req.cmd == CMD_WR) n_store++;
    if (dut.u_asic.ap_valid && dut.u_asic.ap_ready && dut.u_asic.ap_req.cmd == CMD_WR_GB) n_gbl++;
    if (dut.u_asic.eng_start) n_op[int'(dut.u_asic.eng_vop.op)]++;
  end

  // DRAM words read back after the run (constant generate paths into banks)
  logic [WORD_W-1:0] kw [8];          // channel 0, bank TK%16, row R1, words 8..15
  logic [WORD_W-1:0] vw [N_CH][N_BANK]; // every bank, row R1, word TV/16
  for (genvar i = 0; i < 8; i++) begin : g_kp
    assign kw[i] = dut.g_ch[0].u_ch.g_bank[TK % 16].u_bank.cells[R1 * ROW_WORDS + 8 + i];
  end
  for (genvar c = 0; c < N_CH; c++) begin : g_vc
    for (genvar b = 0; b < N_BANK; b++) begin : g_vb
      assign vw[c][b] = dut.g_ch[c].u_ch.g_bank[b].u_bank.cells[R1 * ROW_WORDS + (TV % 1024) / 16];
    end
  end

  // ---------------- program ----------------
  instr_t prog [$];
  function automatic instr_t pim(input pim_cmd_e cmd, input logic ab, input int row, input int col);
    instr_t i;
    i = '0; i.opc = OP_PIM; i.bcast = 1'b1; i.cmd = cmd; i.ab = ab;
    i.row = ROW_AW'(row); i.col = COL_AW'(col);
    return i;
  endfunction
  function automatic instr_t rdmac(input route_e rt, input int addr, input int tok);
    instr_t i;
    i = pim(CMD_RD_MAC, 1'b0, 0, 0);
    i.tag.route = rt; i.tag.addr = SWORD_AW'(addr); i.tag.token = 12'(tok);
    i.tag.base = ROW_AW'(R1); i.tag.rpt = 2'd1;
    return i;
  endfunction
  function automatic instr_t vop(input vop_e op, input int d, input int a, input int b,
                                 input int sd, input int sa, input int sb);
    instr_t i;
    i = '0; i.opc = OP_VOP; i.vop.op = op;
    i.vop.dst = SROW_AW'(d); i.vop.srca = SROW_AW'(a); i.vop.srcb = SROW_AW'(b); i.vop.n = 16'(NE);
    i.vop.sd = 3'(sd); i.vop.sa = 3'(sa); i.vop.sb = 3'(sb);
    return i;
  endfunction
  function automatic instr_t sets(input int idx, input bf16_t v);
    instr_t i;
    i = '0; i.opc = OP_SETS; i.vop.sd = 3'(idx); i.imm = v;
    return i;
  endfunction
  function automatic instr_t opc(input opcode_e o);
    instr_t i;
    i = '0; i.opc = o;
    return i;
  endfunction

  // ---------------- data ----------------
  localparam int unsigned WBASE = 128;   // SRAM word of the first staged weight word
  logic [WORD_W-1:0] wt [N_CH][N_BANK][2][2];   // [ch][bank][row pass][column word]
  logic [WORD_W-1:0] xs [2][2];                 // [slice][word]
  logic [SROW_W-1:0] srow [SRAM_ROWS];
  bf16_t p1 [N_CH*N_BANK], p2 [N_CH*N_BANK], y [N_CH*N_BANK];

  function automatic logic [WORD_W-1:0] rvec(input real scale);
    logic [WORD_W-1:0] v;
    for (int l = 0; l < LANES; l++) v[16*l +: 16] = r2b(scale * (real'(int'($urandom % 2001) - 1000) / 1000.0));
    return v;
  endfunction

  task automatic host_write(input int r, input logic [SROW_W-1:0] d);
    @(negedge clk); host_we = 1; host_addr = SROW_AW'(r); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask
  task automatic host_read(input int r, output logic [SROW_W-1:0] d);
    @(negedge clk); host_re = 1; host_addr = SROW_AW'(r);
    @(negedge clk); host_re = 0; d = host_rdata;
  endtask

  real e [N_CH*N_BANK];
  initial begin
    logic [SROW_W-1:0] d;
    real s, mean, var_, ref_, g, tol;
    for (int r = 0; r < SRAM_ROWS; r++) srow[r] = '0;
    for (int i = 0; i < 2; i++) for (int w = 0; w < 2; w++) begin
      xs[i][w] = rvec(1.0);
      srow[i][WORD_W*w +: WORD_W] = xs[i][w];
    end
    for (int c = 0; c < N_CH; c++) for (int b = 0; b < N_BANK; b++)
      for (int r = 0; r < 2; r++) for (int w = 0; w < 2; w++) begin
        int sw;
        wt[c][b][r][w] = rvec(0.1);
        sw = WBASE + ((c * N_BANK + b) * 4 + r * 2 + w);
        srow[sw / 8][WORD_W * (sw % 8) +: WORD_W] = wt[c][b][r][w];
      end

    // program
    for (int r = 0; r < 2; r++) begin
      if (r == 1) prog.push_back(pim(CMD_PRE, 1'b1, 0, 0));
      prog.push_back(pim(CMD_ACT, 1'b1, r ? R1 : R0, 0));
      for (int c = 0; c < N_CH; c++) for (int b = 0; b < N_BANK; b++) for (int w = 0; w < 2; w++) begin
        instr_t i;
        i = '0; i.opc = OP_STORE; i.ch = CH_AW'(c); i.bank = BANK_AW'(b);
        i.row = ROW_AW'(r ? R1 : R0); i.col = COL_AW'(w);
        i.tag.addr = SWORD_AW'(WBASE + ((c * N_BANK + b) * 4 + r * 2 + w));
        prog.push_back(i);
      end
    end
    begin  // one more word into channel 0 just before the precharge below: tWR
      instr_t i;
      i = '0; i.opc = OP_STORE; i.row = ROW_AW'(R1); i.col = COL_AW'(2); i.tag.addr = '0;
      prog.push_back(i);
    end
    for (int r = 0; r < 2; r++) begin
      instr_t i;
      prog.push_back(pim(CMD_PRE, 1'b1, 0, 0));
      prog.push_back(pim(CMD_ACT, 1'b1, r ? R1 : R0, 0));
      i = opc(OP_GBLOAD); i.bcast = 1'b1; i.col = '0; i.len = 7'd2; i.tag.addr = SWORD_AW'(8 * r);
      prog.push_back(i);
      prog.push_back(pim(CMD_MAC_AB, 1'b0, 0, 0));
      prog.push_back(pim(CMD_MAC_AB, 1'b0, 0, 1));
      prog.push_back(rdmac(RT_SRAM, 8 * (2 + r), 0));
    end
    for (int k = 0; k < 3; k++) prog.push_back(rdmac(RT_SRAM, 8 * (40 + k), 0));
    prog.push_back(opc(OP_WAIT));
    prog.push_back(vop(V_ADD, 4, 2, 3, 0, 0, 0));
    // Softmax
    prog.push_back(vop(V_EXP, 5, 4, 0, 0, 0, 0));
    prog.push_back(vop(V_SUM, 0, 5, 0, 0, 0, 0));
    prog.push_back(vop(S_RECIP, 0, 0, 0, 1, 0, 0));
    prog.push_back(vop(V_SMUL, 6, 5, 0, 0, 1, 0));
    // LayerNorm (gamma = 1, beta = 0)
    prog.push_back(vop(V_SUM, 0, 4, 0, 2, 0, 0));
    prog.push_back(sets(3, r2b(1.0 / real'(NE))));
    prog.push_back(vop(S_MUL, 0, 0, 0, 2, 2, 3));
    prog.push_back(sets(4, 16'hBF80));
    prog.push_back(vop(S_MUL, 0, 0, 0, 2, 2, 4));
    prog.push_back(vop(V_SADD, 7, 4, 0, 0, 2, 0));
    prog.push_back(vop(V_MUL, 8, 7, 7, 0, 0, 0));
    prog.push_back(vop(V_SUM, 0, 8, 0, 5, 0, 0));
    prog.push_back(vop(S_MUL, 0, 0, 0, 5, 5, 3));
    prog.push_back(sets(0, 16'h3727));               // epsilon, about 1e-5
    prog.push_back(vop(S_ADD, 0, 0, 0, 5, 5, 0));
    prog.push_back(vop(S_RSQRT, 0, 0, 0, 6, 5, 0));
    prog.push_back(vop(V_SMUL, 9, 7, 0, 0, 6, 0));
    // GELU, tanh form
    prog.push_back(vop(V_MUL, 10, 4, 4, 0, 0, 0));
    prog.push_back(vop(V_MUL, 10, 10, 4, 0, 0, 0));
    prog.push_back(sets(7, r2b(0.044715)));
    prog.push_back(vop(V_SMUL, 10, 10, 0, 0, 7, 0));
    prog.push_back(vop(V_ADD, 10, 10, 4, 0, 0, 0));
    prog.push_back(sets(7, r2b(0.7978845608)));
    prog.push_back(vop(V_SMUL, 10, 10, 0, 0, 7, 0));
    prog.push_back(vop(V_TANH, 11, 10, 0, 0, 0, 0));
    prog.push_back(sets(7, 16'h3F80));
    prog.push_back(vop(V_SADD, 11, 11, 0, 0, 7, 0));
    prog.push_back(vop(V_MUL, 11, 11, 4, 0, 0, 0));
    prog.push_back(sets(7, 16'h3F00));
    prog.push_back(vop(V_SMUL, 11, 11, 0, 0, 7, 0));
    // Key and Value write-back (row R1 is open)
    prog.push_back(pim(CMD_MAC_AB, 1'b0, 0, 0));
    prog.push_back(rdmac(RT_KWB, 8, TK));
    prog.push_back(pim(CMD_MAC_AB, 1'b0, 0, 1));
    prog.push_back(rdmac(RT_VWB, 0, TV));
    prog.push_back(opc(OP_WAIT));
    prog.push_back(opc(OP_HALT));
    if (prog.size() > IMD) $fatal(1, "program too long");

    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < SRAM_ROWS; r++) if (srow[r] != '0) host_write(r, srow[r]);
    foreach (prog[k]) begin
      @(negedge clk); imem_we = 1; imem_addr = $clog2(IMD)'(k); imem_wdata = prog[k];
    end
    @(negedge clk); imem_we = 0;
    // start late enough that the first refresh falls into the weight loading
    while (int'(dut.g_ch[0].u_ch.ref_cnt) < int'(TREFP) - 300) @(negedge clk);
    start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (20) @(negedge clk);

    // ---- reference ----
    for (int i = 0; i < N_CH * N_BANK; i++) begin
      int c, b;
      c = i / N_BANK; b = i % N_BANK;
      p1[i] = fadd(fadd(16'h0, dot16(xs[0][0], wt[c][b][0][0])), dot16(xs[0][1], wt[c][b][0][1]));
      p2[i] = fadd(fadd(16'h0, dot16(xs[1][0], wt[c][b][1][0])), dot16(xs[1][1], wt[c][b][1][1]));
      y[i]  = fadd(p1[i], p2[i]);
    end
    host_read(2, d);
    for (int i = 0; i < N_CH * N_BANK; i++) chk(d[16*i +: 16] == p1[i], $sformatf("partial sum 1 [%0d] %h %h", i, d[16*i +: 16], p1[i]));
    host_read(3, d);
    for (int i = 0; i < N_CH * N_BANK; i++) chk(d[16*i +: 16] == p2[i], $sformatf("partial sum 2 [%0d]", i));
    host_read(4, d);
    for (int i = 0; i < NE; i++) chk(d[16*i +: 16] == y[i], $sformatf("V_ADD [%0d] %h %h", i, d[16*i +: 16], y[i]));
    // Softmax
    s = 0.0;
    for (int i = 0; i < NE; i++) begin e[i] = $exp(b2r(y[i])); s += e[i]; end
    host_read(6, d);
    for (int i = 0; i < NE; i++)
      chk(relerr(d[16*i +: 16], e[i] / s) < 0.03, $sformatf("softmax [%0d] %f %f", i, b2r(d[16*i +: 16]), e[i] / s));
    // LayerNorm
    mean = 0.0; var_ = 0.0;
    for (int i = 0; i < NE; i++) mean += b2r(y[i]);
    mean /= real'(NE);
    for (int i = 0; i < NE; i++) var_ += (b2r(y[i]) - mean) ** 2;
    var_ /= real'(NE);
    host_read(9, d);
    for (int i = 0; i < NE; i++) begin
      ref_ = (b2r(y[i]) - mean) / $sqrt(var_);
      g = b2r(d[16*i +: 16]);
      chk((g - ref_ < 0.08) && (ref_ - g < 0.08), $sformatf("layernorm [%0d] %f %f", i, g, ref_));
    end
    // GELU
    host_read(11, d);
    for (int i = 0; i < NE; i++) begin
      real x;
      x = b2r(y[i]);
      ref_ = 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
      g = b2r(d[16*i +: 16]);
      tol = 0.01 + 0.03 * ((ref_ < 0) ? -ref_ : ref_);
      chk((g - ref_ < tol) && (ref_ - g < tol), $sformatf("gelu [%0d] %f %f", i, g, ref_));
    end
    // Key write-back: response of channel c is word 8 + c of bank TK's row
    for (int c = 0; c < N_CH; c++) for (int b = 0; b < N_BANK; b++)
      chk(kw[c][16*b +: 16] == dot16(xs[1][0], wt[c][b][1][0]), $sformatf("key wb ch%0d bank%0d", c, b));
    // Value write-back: result of bank b in channel c goes to bank b of channel c, lane TV%16
    for (int c = 0; c < N_CH; c++) for (int b = 0; b < N_BANK; b++)
      chk(vw[c][b][16*(TV % 16) +: 16] == dot16(xs[1][1], wt[c][b][1][1]), $sformatf("value wb ch%0d bank%0d", c, b));

    // ---- mechanisms ----
    $display("refresh=%0d refresh_blocked=%0d tRCD=%0d tRP=%0d tWR=%0d bcast=%0d outstanding_stall=%0d engine_wait=%0d",
             n_ref, n_refblk, n_trcd, n_trp, n_twr, n_bcast, n_outst, n_engwait);
    $display("key_wb=%0d value_wb=%0d dq_to_sram=%0d store=%0d gbload_words=%0d stall_cycles=%0d",
             n_kwb, n_vwb, n_dq2sram, n_store, n_gbl, stall_cycles);
    chk(n_ref > 0, "refresh never happened");
    chk(n_refblk > 0, "no command waited for a refresh");
    chk(n_trcd > 0, "no tRCD stall");
    chk(n_trp > 0, "no tRP stall");
    chk(n_twr > 0, "no tWR stall");
    chk(n_bcast > 0, "no broadcast");
    chk(n_outst > 0, "no outstanding-read stall");
    chk(n_engwait > 0, "no engine-busy stall");
    chk(n_kwb == N_CH, "key write-back count");
    chk(n_vwb == N_CH, "value write-back count");
    chk(n_dq2sram == 5 * N_CH, "SRAM writes from the data queue");
    chk(n_store == 2 * N_CH * N_BANK * 2 + 1, "weight stores");
    chk(n_gbl == 4, "global-buffer loads");
    chk(stall_cycles > 0, "stall cycles counted");
    for (int k = 0; k < 11; k++) chk(n_op[k] > 0, $sformatf("engine op %0d never ran", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
