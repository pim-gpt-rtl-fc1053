// tb_compute_engine: runs every engine operation on a model SRAM (reduced
// widths: 32 lanes, Taylor 8 lanes) and checks the results against BF16
// reference arithmetic: elementwise add/multiply (exact match), vector-scalar
// ops, the masked sum over a partial last row (same tree order), e^x and
// tanh (within 2 %), and the scalar add, multiply, reciprocal and inverse
// square root. Also checks the 2-cycles-per-row rate of elementwise ops.
module tb_compute_engine;
  import pimgpt_pkg::*;
  import bf16_ref_pkg::*;
  localparam int VL = 32, TL = 8, SR = 64;
  logic clk = 0, rst_n = 0, start = 0, busy, sets_we = 0;
  vop_t vop;
  logic [2:0] sets_idx = 0;
  bf16_t sets_val = 0;
  bf16_t sreg [8];
  logic rea, reb, we;
  logic [5:0] raddra, raddrb, waddr;
  logic [VL*16-1:0] rdataa, rdatab, wdata;
  logic [VL*16-1:0] mem [SR];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  always @(posedge clk) begin
    if (rea) rdataa <= mem[raddra];
    if (reb) rdatab <= mem[raddrb];
    if (we) mem[waddr] <= wdata;
  end
  compute_engine #(.VL(VL), .TL(TL), .SROWS(SR)) dut (.*);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic run(input vop_e op, input int dst, input int a, input int b, input int n,
                     input int sd, input int sa, input int sb, output int cycles);
    @(negedge clk);
    vop = '0; vop.op = op; vop.dst = 9'(dst); vop.srca = 9'(a); vop.srcb = 9'(b);
    vop.n = 16'(n); vop.sd = 3'(sd); vop.sa = 3'(sa); vop.sb = 3'(sb);
    start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  task automatic sets(input int i, input bf16_t v);
    @(negedge clk); sets_we = 1; sets_idx = 3'(i); sets_val = v;
    @(negedge clk); sets_we = 0;
  endtask

  function automatic bf16_t el(input int row, input int l);
    return mem[row][16*l +: 16];
  endfunction

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int cyc;
    vop = '0;
    for (int r = 0; r < SR; r++) for (int l = 0; l < VL; l++) mem[r][16*l +: 16] = rnd(122, 128);
    for (int r = 30; r < 33; r++) for (int l = 0; l < VL; l++) mem[r][16*l +: 16] = rnd(116, 125);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // V_ADD / V_MUL over 3 rows (n = 70)
    run(V_ADD, 10, 0, 3, 70, 0, 0, 0, cyc);
    chk(cyc == 7, $sformatf("V_ADD cycles %0d", cyc));
    for (int r = 0; r < 3; r++) for (int l = 0; l < VL; l++)
      chk(el(10 + r, l) == fadd(el(r, l), el(3 + r, l)), "V_ADD");
    run(V_MUL, 13, 0, 3, 70, 0, 0, 0, cyc);
    for (int r = 0; r < 3; r++) for (int l = 0; l < VL; l++)
      chk(el(13 + r, l) == fmul(el(r, l), el(3 + r, l)), "V_MUL");
    // vector-scalar
    sets(2, 16'h3FC0);  // 1.5
    run(V_SMUL, 16, 0, 0, 64, 0, 2, 0, cyc);
    run(V_SADD, 18, 0, 0, 64, 0, 2, 0, cyc);
    for (int r = 0; r < 2; r++) for (int l = 0; l < VL; l++) begin
      chk(el(16 + r, l) == fmul(el(r, l), 16'h3FC0), "V_SMUL");
      chk(el(18 + r, l) == fadd(el(r, l), 16'h3FC0), "V_SADD");
    end
    // V_SUM over 70 elements, tree order per row
    run(V_SUM, 0, 0, 0, 70, 5, 0, 0, cyc);
    begin
      bf16_t acc, nd [VL];
      acc = 16'h0000;
      for (int r = 0; r < 3; r++) begin
        for (int l = 0; l < VL; l++) nd[l] = (r * VL + l < 70) ? el(r, l) : 16'h0000;
        for (int n = VL / 2; n >= 1; n = n / 2)
          for (int i = 0; i < n; i++) nd[i] = fadd(nd[2*i], nd[2*i+1]);
        acc = fadd(acc, nd[0]);
      end
      chk(sreg[5] == acc, $sformatf("V_SUM got %h exp %h", sreg[5], acc));
    end
    // Taylor ops
    run(V_EXP, 40, 30, 0, 96, 0, 0, 0, cyc);
    run(V_TANH, 43, 30, 0, 96, 0, 0, 0, cyc);
    for (int r = 0; r < 3; r++) for (int l = 0; l < VL; l++) begin
      real v;
      v = b2r(el(30 + r, l));
      chk(relerr(el(40 + r, l), $exp(v)) < 0.02, $sformatf("V_EXP %f", v));
      chk(relerr(el(43 + r, l), ($exp(v) - $exp(-v)) / ($exp(v) + $exp(-v))) < 0.02, $sformatf("V_TANH %f", v));
    end
    // scalar ops
    sets(0, 16'h4040);  // 3
    sets(1, 16'h4110);  // 9
    run(S_ADD, 0, 0, 0, 0, 3, 0, 1, cyc);
    chk(sreg[3] == 16'h4140, "S_ADD 3+9=12");
    run(S_MUL, 0, 0, 0, 0, 4, 0, 1, cyc);
    chk(sreg[4] == 16'h41D8, "S_MUL 3*9=27");
    run(S_RECIP, 0, 0, 0, 0, 6, 0, 0, cyc);
    chk(relerr(sreg[6], 1.0 / 3.0) < 0.008, "S_RECIP 1/3");
    run(S_RSQRT, 0, 0, 0, 0, 7, 1, 0, cyc);
    chk(relerr(sreg[7], 1.0 / 3.0) < 0.01, "S_RSQRT 1/sqrt(9)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
