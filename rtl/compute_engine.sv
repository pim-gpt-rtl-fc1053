// compute_engine: the ASIC's computation engine. It runs the non-VMM work of
// GPT (partial-sum accumulation, residual add, LayerNorm, Softmax, GELU) as a
// sequence of vector and scalar operations on rows of the SRAM buffer.
//
// Parts, after the paper's ASIC figure:
//  * multiplier array: VL BF16 multipliers (128 in the paper's Table 1);
//  * adder array: VL elementwise BF16 adders plus a VL-1 adder reduction tree
//    and one accumulating adder, 2*VL = 256 adders as in Table 1 (how the 256
//    adders are split is this design's reading);
//  * the pipelined Taylor unit (e^x, tanh), TL lanes wide;
//  * the fast reciprocal and fast inverse-square-root units;
//  * eight BF16 scalar registers S0..S7 (this design's own).
// Operations (vop_e): V_ADD, V_MUL (row by row, A op B), V_SADD, V_SMUL
// (A op S[sa]), V_EXP, V_TANH (Taylor unit), V_SUM (S[sd] = sum of the first n
// elements of A), S_ADD, S_MUL, S_RECIP, S_RSQRT (scalar registers). Division
// is a reciprocal followed by a multiply, as in the paper. Vector operands
// start at SRAM rows srca/srcb, the result at dst; n is the element count and
// ceil(n/VL) rows are processed (a partial last row is written whole).
//
// Timing: elementwise and sum operations take 2 cycles per row (read, then
// compute and write); V_EXP/V_TANH take VL/TL cycles to feed a row plus the
// 7-cycle Taylor latency; scalar add/multiply take 1 cycle, reciprocal 5 and
// inverse square root 3 cycles (plus 1 to start). busy is high from start
// until the last result is written. The engine reads and writes the SRAM
// through the ports below and never stalls on them.
module compute_engine
  import pimgpt_pkg::*;
#(
  parameter int unsigned VL    = VLANES,
  parameter int unsigned TL    = 16,
  parameter int unsigned SROWS = SRAM_ROWS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  vop_t                     vop,
  output logic                     busy,
  input  logic                     sets_we,
  input  logic [2:0]               sets_idx,
  input  bf16_t                    sets_val,
  output bf16_t                    sreg [8],
  // SRAM ports
  output logic                     rea,
  output logic [$clog2(SROWS)-1:0] raddra,
  input  logic [VL*16-1:0]         rdataa,
  output logic                     reb,
  output logic [$clog2(SROWS)-1:0] raddrb,
  input  logic [VL*16-1:0]         rdatab,
  output logic                     we,
  output logic [$clog2(SROWS)-1:0] waddr,
  output logic [VL*16-1:0]         wdata
);
  localparam int unsigned RA  = $clog2(SROWS);
  localparam int unsigned NSL = VL / TL;   // Taylor slices per row
  localparam int unsigned SW  = $clog2(NSL) + 1;

  typedef enum logic [2:0] {S_IDLE, S_RD, S_EX, S_TFEED, S_SCAL, S_WAITU} st_e;
  st_e         st;
  vop_t        op;
  logic [15:0] row, nrows;
  bf16_t       acc;
  logic [SW-1:0] fed, got;
  logic [VL*16-1:0] res;

  // ---------------- datapath arrays ----------------
  bf16_t ma [VL], mb [VL], mo [VL];
  bf16_t aa [VL], ab [VL], ao [VL];
  bf16_t lf [VL];       // masked leaves of the reduction tree
  bf16_t root;
  bf16_t acc_d;
  logic  scal;

  assign scal = (op.op == S_ADD) || (op.op == S_MUL);

  always_comb begin
    for (int l = 0; l < VL; l++) begin
      bf16_t av, bv;
      av = rdataa[16*l +: 16];
      bv = rdatab[16*l +: 16];
      if (scal) begin
        av = (l == 0) ? sreg[op.sa] : '0;
        bv = (l == 0) ? sreg[op.sb] : '0;
      end else if (op.op == V_SADD || op.op == V_SMUL) begin
        bv = sreg[op.sa];
      end
      ma[l] = av; mb[l] = bv;
      aa[l] = av; ab[l] = bv;
      // masked leaves of the reduction tree
      lf[l] = (32'(row) * VL + 32'(l) < 32'(op.n)) ? rdataa[16*l +: 16] : '0;
    end
  end

  for (genvar l = 0; l < VL; l++) begin : g_arr
    bf16_mul u_mul (.a(ma[l]), .b(mb[l]), .y(mo[l]));
    bf16_add u_add (.a(aa[l]), .b(ab[l]), .y(ao[l]));
  end
  // reduction tree: level k has VL >> (k+1) adders
  localparam int unsigned LV = $clog2(VL);
  for (genvar k = 0; k < LV; k++) begin : g_lvl
    bf16_t nd [VL >> (k+1)];
    for (genvar i = 0; i < (VL >> (k+1)); i++) begin : g_n
      if (k == 0) begin : g_leaf
        bf16_add u_t (.a(lf[2*i]), .b(lf[2*i+1]), .y(nd[i]));
      end else begin : g_inner
        bf16_add u_t (.a(g_lvl[k-1].nd[2*i]), .b(g_lvl[k-1].nd[2*i+1]), .y(nd[i]));
      end
    end
  end
  assign root = g_lvl[LV-1].nd[0];
  bf16_add u_acc (.a(acc), .b(root), .y(acc_d));

  // ---------------- Taylor unit ----------------
  bf16_t tx [TL], ty [TL];
  logic  t_in, t_out;
  always_comb
    for (int l = 0; l < TL; l++) tx[l] = rdataa[16*(32'(fed)*TL + l) +: 16];
  assign t_in = (st == S_TFEED) && (fed < SW'(NSL));
  taylor_unit #(.TL(TL)) u_taylor (
    .clk, .rst_n, .in_valid(t_in), .is_tanh(op.op == V_TANH), .x(tx),
    .out_valid(t_out), .y(ty));

  // ---------------- reciprocal / inverse square root ----------------
  logic  rc_in, rc_out, rs_in, rs_out;
  bf16_t rc_y, rs_y;
  fast_recip   u_recip (.clk, .rst_n, .in_valid(rc_in), .d(sreg[op.sa]), .out_valid(rc_out), .y(rc_y));
  fast_invsqrt u_rsqrt (.clk, .rst_n, .in_valid(rs_in), .d(sreg[op.sa]), .out_valid(rs_out), .y(rs_y));
  assign rc_in = (st == S_SCAL) && (op.op == S_RECIP);
  assign rs_in = (st == S_SCAL) && (op.op == S_RSQRT);

  // ---------------- SRAM interface ----------------
  assign rea    = (st == S_RD);
  assign reb    = (st == S_RD);
  assign raddra = RA'(op.srca) + RA'(row);
  assign raddrb = RA'(op.srcb) + RA'(row);
  assign waddr  = RA'(op.dst) + RA'(row);
  always_comb begin
    we    = 1'b0;
    wdata = res;
    if (st == S_EX && op.op != V_SUM) begin
      we = 1'b1;
      for (int l = 0; l < VL; l++)
        wdata[16*l +: 16] = (op.op == V_MUL || op.op == V_SMUL) ? mo[l] : ao[l];
    end else if (st == S_TFEED && got == SW'(NSL)) begin
      we = 1'b1;
    end
  end

  assign busy = (st != S_IDLE);

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; op <= '0; row <= '0; nrows <= '0; acc <= '0;
      fed <= '0; got <= '0; res <= '0;
      for (int i = 0; i < 8; i++) sreg[i] <= '0;
    end else begin
      if (sets_we && st == S_IDLE) sreg[sets_idx] <= sets_val;
      unique case (st)
        S_IDLE: if (start) begin
          op    <= vop;
          row   <= '0;
          acc   <= '0;
          nrows <= 16'((32'(vop.n) + VL - 1) / VL);
          st    <= (vop.op inside {S_ADD, S_MUL, S_RECIP, S_RSQRT}) ? S_SCAL : S_RD;
        end
        S_RD: begin
          st  <= (op.op inside {V_EXP, V_TANH}) ? S_TFEED : S_EX;
          fed <= '0; got <= '0;
        end
        S_EX: begin
          if (op.op == V_SUM) acc <= acc_d;
          if (row + 1 >= nrows) begin
            if (op.op == V_SUM) sreg[op.sd] <= acc_d;
            st <= S_IDLE;
          end else begin
            row <= row + 1'b1;
            st  <= S_RD;
          end
        end
        S_TFEED: begin
          if (fed < SW'(NSL)) fed <= fed + 1'b1;
          if (t_out) begin
            for (int l = 0; l < TL; l++) res[16*(32'(got)*TL + l) +: 16] <= ty[l];
            got <= got + 1'b1;
          end
          if (got == SW'(NSL)) begin
            if (row + 1 >= nrows) st <= S_IDLE;
            else begin row <= row + 1'b1; st <= S_RD; end
          end
        end
        S_SCAL: begin
          if (scal) begin
            sreg[op.sd] <= (op.op == S_MUL) ? mo[0] : ao[0];
            st <= S_IDLE;
          end else st <= S_WAITU;
        end
        S_WAITU: begin
          if (rc_out) begin sreg[op.sd] <= rc_y; st <= S_IDLE; end
          if (rs_out) begin sreg[op.sd] <= rs_y; st <= S_IDLE; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  initial assert (VL % TL == 0 && (VL & (VL - 1)) == 0) else $error("compute_engine: VL must be a power of two and a multiple of TL");
endmodule
