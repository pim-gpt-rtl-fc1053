// pim_channel: one GDDR6-PIM channel: a 2 KB global buffer, 16 DRAM banks and
// one MAC unit per bank, behind a command decoder that enforces DRAM timing.
//
// How it works. Commands arrive one per cycle on a valid/ready port (the
// PIM commands of pimgpt_pkg). ACT/PRE open and close rows, in one bank or in
// all banks at once (ab). WR writes lanes of a 256-bit word into one bank's
// open row; WR_GB writes the global buffer. MAC_AB reads column word col of
// the open row of every bank and the global-buffer word col, and each bank's
// MAC unit accumulates the 16-element dot product. RD_MAC returns the 16
// accumulators (one BF16 per bank, bank b in lanes b) as one 256-bit word and
// clears them; RD returns one bank's column word. Read data leaves through a
// response queue, tagged with the command's tag.
//
// Timing (paper's values in 1 GHz cycles): a column command to a bank waits
// T_RCD cycles after its ACT, an ACT waits T_RP after the bank's PRE, a PRE
// waits T_WR after the bank's last write, and column commands are at most one
// per cycle (tCCD = 1 ns). Every T_REFI cycles the channel refreshes: it
// accepts no command for T_RP + T_RFC + T_RCD cycles. Which rows were open is
// kept, so the command stream needs no change (this design's choice; the paper
// gives tRFC and tREFI but not how refresh is scheduled). A command that is not
// yet legal is held with cmd_ready low (a stall). MAC_AB, RD and RD_MAC data
// move through a 2-stage pipeline: command, then buffer/bank data registered,
// then MAC result or read data into the queue. Read data reaches rsp_valid
// 3 cycles after the command is accepted.
module pim_channel
  import pimgpt_pkg::*;
#(
  parameter int unsigned ROWS   = BANK_ROWS,
  parameter int unsigned TRCD   = T_RCD,
  parameter int unsigned TRP    = T_RP,
  parameter int unsigned TWR    = T_WR,
  parameter int unsigned TRFC   = T_RFC,
  parameter int unsigned TREFI  = T_REFI,
  parameter logic [CH_AW-1:0] CH_ID = '0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid,
  output logic     cmd_ready,
  input  pim_req_t cmd,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output pim_rsp_t rsp,
  output logic     refreshing
);
  localparam int unsigned RA = $clog2(ROWS);
  localparam int unsigned CW = 10;   // saturating timing counters
  localparam int unsigned REF_STALL = TRP + TRFC + TRCD;

  // ---- per-bank state ----
  logic [N_BANK-1:0]        bk_open;
  logic [CW-1:0]            t_act    [N_BANK];   // cycles since ACT
  logic [CW-1:0]            t_pre    [N_BANK];   // cycles since PRE
  logic [CW-1:0]            t_wr     [N_BANK];   // cycles since last WR
  logic [WORD_W-1:0]        bk_rdata [N_BANK];

  logic [N_BANK-1:0] sel, act_v, pre_v, wr_v;
  logic legal, accept;
  logic [15:0] ref_cnt;
  logic [9:0]  ref_busy;
  logic [2:0]  fifo_cnt;
  logic        q_in_ready;

  // ---- pipeline registers ----
  logic        s1_mac, s1_rdmac, s1_rd, s2_rd, s2_rdmac;
  rd_tag_t     s1_tag, s2_tag;
  logic [WORD_W-1:0] s1_wgt [N_BANK];
  logic [WORD_W-1:0] s1_rdw, s2_rdw;
  logic [WORD_W-1:0] gb_rdata;
  logic [N_BANK-1:0] mac_rv;
  bf16_t             mac_res [N_BANK];

  always_comb begin
    sel = cmd.ab ? '1 : (N_BANK'(1) << cmd.bank);
    legal = 1'b1;
    for (int b = 0; b < N_BANK; b++) begin
      if (sel[b] || cmd.cmd == CMD_MAC_AB) begin
        unique case (cmd.cmd)
          CMD_ACT:            if (bk_open[b] || t_pre[b] < CW'(TRP)) legal = 1'b0;
          CMD_PRE:            if (t_wr[b] < CW'(TWR)) legal = 1'b0;
          CMD_WR, CMD_RD,
          CMD_MAC_AB:         if (!bk_open[b] || t_act[b] < CW'(TRCD)) legal = 1'b0;
          default: ;
        endcase
      end
    end
  end

  // Room for up to two responses still in the pipeline.
  assign cmd_ready = legal && (ref_busy == '0) && (ref_cnt < 16'(TREFI)) && (fifo_cnt <= 3'd1)
                     && !(s1_rd || s1_rdmac);
  assign accept    = cmd_valid && cmd_ready;
  assign refreshing = (ref_busy != '0);

  always_comb begin
    act_v = '0; pre_v = '0; wr_v = '0;
    if (accept) begin
      if (cmd.cmd == CMD_ACT) act_v = sel;
      if (cmd.cmd == CMD_PRE) pre_v = sel & bk_open;
      if (cmd.cmd == CMD_WR)  wr_v  = sel;
    end
  end

  // ---- banks and MAC units ----
  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    logic is_open_b;
    logic [RA-1:0] open_row_b;  // open row, kept for debug visibility
    dram_bank #(.ROWS(ROWS)) u_bank (
      .clk, .rst_n,
      .act(act_v[b]), .act_row(cmd.row[RA-1:0]), .pre(pre_v[b]),
      .rd_col(cmd.col), .rd_data(bk_rdata[b]),
      .wr(wr_v[b]), .wr_col(cmd.col), .wr_mask(cmd.mask), .wr_data(cmd.data),
      .is_open(is_open_b), .open_row(open_row_b));
    assign bk_open[b] = is_open_b;

    pim_mac_unit u_mac (
      .clk, .rst_n, .mac_en(s1_mac), .rd_en(s1_rdmac),
      .vec(gb_rdata), .wgt(s1_wgt[b]),
      .result(mac_res[b]), .result_valid(mac_rv[b]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        t_act[b] <= '0; t_pre[b] <= '1; t_wr[b] <= '1;
      end else begin
        t_act[b] <= act_v[b] ? '0 : ((t_act[b] == '1) ? t_act[b] : t_act[b] + 1'b1);
        t_pre[b] <= pre_v[b] ? '0 : ((t_pre[b] == '1) ? t_pre[b] : t_pre[b] + 1'b1);
        t_wr[b]  <= wr_v[b]  ? '0 : ((t_wr[b]  == '1) ? t_wr[b]  : t_wr[b]  + 1'b1);
      end
    end
    always_ff @(posedge clk)
      if (accept && cmd.cmd == CMD_MAC_AB) s1_wgt[b] <= bk_rdata[b];
  end

  global_buffer u_gb (
    .clk,
    .we(accept && cmd.cmd == CMD_WR_GB), .waddr(cmd.col), .wmask(cmd.mask), .wdata(cmd.data),
    .re(accept && cmd.cmd == CMD_MAC_AB), .raddr(cmd.col), .rdata(gb_rdata));

  // ---- pipeline and refresh ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_mac <= 1'b0; s1_rdmac <= 1'b0; s1_rd <= 1'b0;
      s2_rd <= 1'b0; s2_rdmac <= 1'b0;
      s1_tag <= '0; s2_tag <= '0; s1_rdw <= '0; s2_rdw <= '0;
      ref_cnt <= '0; ref_busy <= '0;
    end else begin
      s1_mac   <= accept && cmd.cmd == CMD_MAC_AB;
      s1_rdmac <= accept && cmd.cmd == CMD_RD_MAC;
      s1_rd    <= accept && cmd.cmd == CMD_RD;
      if (accept) s1_tag <= cmd.tag;
      if (accept && cmd.cmd == CMD_RD) s1_rdw <= bk_rdata[cmd.bank];
      s2_rd    <= s1_rd;
      s2_rdmac <= s1_rdmac;
      s2_tag   <= s1_tag;
      s2_rdw   <= s1_rdw;
      if (ref_busy != '0) begin
        ref_busy <= ref_busy - 1'b1;
      end else if (ref_cnt >= 16'(TREFI) && !s1_mac && !s1_rdmac && !s1_rd) begin
        ref_busy <= 10'(REF_STALL);
        ref_cnt  <= '0;
      end else begin
        ref_cnt  <= ref_cnt + 1'b1;
      end
    end
  end

  // ---- response queue ----
  pim_rsp_t q_in;
  always_comb begin
    q_in.ch  = CH_ID;
    q_in.tag = s2_tag;
    q_in.data = s2_rdw;
    if (s2_rdmac)
      for (int b = 0; b < N_BANK; b++) q_in.data[16*b +: 16] = mac_res[b];
  end

  sync_fifo #(.T(pim_rsp_t), .DEPTH(4)) u_rspq (
    .clk, .rst_n,
    .in_valid(s2_rd || s2_rdmac), .in_ready(q_in_ready), .in_data(q_in),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_data(rsp), .count(fifo_cnt));

  assert property (@(posedge clk) disable iff (!rst_n) (s2_rd || s2_rdmac) |-> q_in_ready)
    else $error("pim_channel: response queue overflow");
  assert property (@(posedge clk) disable iff (!rst_n) s2_rdmac |-> (&mac_rv))
    else $error("pim_channel: MAC result missing");
endmodule
