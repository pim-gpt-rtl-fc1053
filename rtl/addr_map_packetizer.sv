// addr_map_packetizer: the "Address Mapping Packetizer" in front of the
// request queue. It turns instructions from the scheduler into addressed PIM
// request packets, unicast or broadcast to all channels.
//
//  OP_PIM    : one packet, the command and address taken from the instruction
//              (ACT, PRE, MAC_AB, RD_MAC, ...). Passed straight through.
//  OP_GBLOAD : len packets; packet k reads SRAM word tag.addr + k and writes it
//              into global-buffer word col + k (WR_GB), broadcast when bcast is
//              set: this is how an input vector reaches the PIM channels.
//  OP_STORE  : one packet writing SRAM word tag.addr into bank/row/col (WR);
//              used to load weights.
// SRAM words are 256 bits; word w is sub-word w mod 8 of SRAM row w / 8.
// Timing: OP_PIM is passed in the cycle it arrives (cmd_ready = out_ready);
// a word of OP_GBLOAD/OP_STORE takes 3 cycles (read, data, send) plus any
// wait for out_ready. busy is high while a copy is in progress.
module addr_map_packetizer
  import pimgpt_pkg::*;
#(
  parameter int unsigned SROWS = SRAM_ROWS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  instr_t                   cmd,
  output logic                     busy,
  output logic                     sram_re,
  output logic [$clog2(SROWS)-1:0] sram_raddr,
  input  logic [SROW_W-1:0]        sram_rdata,
  output logic                     out_valid,
  input  logic                     out_ready,
  output pim_req_t                 out
);
  localparam int unsigned RA = $clog2(SROWS);
  typedef enum logic [1:0] {A_IDLE, A_RD, A_DATA, A_SEND} st_e;
  st_e          st;
  instr_t       cur;
  logic [6:0]   k;
  logic [SWORD_AW-1:0] w;
  logic [2:0]   sub_q;
  logic [WORD_W-1:0] word_q;

  assign w = cur.tag.addr + SWORD_AW'(k);
  assign busy = (st != A_IDLE);
  assign sram_re = (st == A_RD);
  assign sram_raddr = RA'(w >> 3);

  always_comb begin
    out = '0;
    out_valid = 1'b0;
    cmd_ready = 1'b0;
    if (st == A_IDLE) begin
      out.bcast = cmd.bcast; out.ch = cmd.ch; out.cmd = cmd.cmd; out.ab = cmd.ab;
      out.bank = cmd.bank; out.row = cmd.row; out.col = cmd.col; out.tag = cmd.tag;
      out.mask = '1;
      out_valid = cmd_valid && cmd.opc == OP_PIM;
      cmd_ready = (cmd.opc == OP_PIM) ? out_ready : 1'b1;
    end else if (st == A_SEND) begin
      out.bcast = cur.bcast; out.ch = cur.ch; out.ab = 1'b0;
      out.cmd   = (cur.opc == OP_GBLOAD) ? CMD_WR_GB : CMD_WR;
      out.bank  = cur.bank; out.row = cur.row;
      out.col   = cur.col + COL_AW'(k);
      out.mask  = '1;
      out.data  = word_q;
      out_valid = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; cur <= '0; k <= '0; sub_q <= '0; word_q <= '0;
    end else begin
      unique case (st)
        A_IDLE: if (cmd_valid && (cmd.opc == OP_GBLOAD || cmd.opc == OP_STORE)) begin
          cur <= cmd;
          if (cmd.opc == OP_STORE) cur.len <= 7'd1;
          k   <= '0;
          st  <= A_RD;
        end
        A_RD:   begin sub_q <= w[2:0]; st <= A_DATA; end
        A_DATA: begin word_q <= sram_rdata[WORD_W*sub_q +: WORD_W]; st <= A_SEND; end
        A_SEND: if (out_ready) begin
          if (k + 1'b1 >= cur.len) st <= A_IDLE;
          else begin k <= k + 1'b1; st <= A_RD; end
        end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
