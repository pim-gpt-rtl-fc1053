// pimgpt_pkg: types and constants shared by the PIM-GPT RTL.
//
// All data is bfloat16 (1 sign, 8 exponent, 7 fraction bits), as in the paper.
// The PIM side is organised as channels of 16 banks; each bank row is 2 KB
// (1024 BF16 values) and is accessed as 64 column words of 256 bits
// (16 x 16 b), the width the paper gives for the bank-to-MAC and buffer-to-MAC
// paths. Timing constants are the paper's DRAM timings converted to 1 GHz
// cycles. Command, packet and instruction encodings are this design's own.
package pimgpt_pkg;

  typedef logic [15:0] bf16_t;

  // ---- PIM organisation (paper, Table 1) ----
  localparam int unsigned N_CH        = 8;     // channels
  localparam int unsigned N_BANK      = 16;    // banks per channel
  localparam int unsigned LANES       = 16;    // BF16 values per 256-bit word
  localparam int unsigned WORD_W      = LANES * 16;  // 256
  localparam int unsigned ROW_WORDS   = 64;    // 2 KB row / 32 B
  localparam int unsigned BANK_ROWS   = 16384; // 4 Gb / 16 banks / 2 KB
  localparam int unsigned GB_WORDS    = 64;    // 2 KB global buffer / 32 B
  localparam int unsigned ROW_AW      = 14;    // row address bits (16384 rows)
  localparam int unsigned COL_AW      = 6;     // column word address bits
  localparam int unsigned CH_AW       = 3;
  localparam int unsigned BANK_AW     = 4;

  // ---- DRAM timing in 1 GHz cycles (paper, Table 1) ----
  localparam int unsigned T_RCD  = 12;
  localparam int unsigned T_RP   = 12;
  localparam int unsigned T_CCD  = 1;
  localparam int unsigned T_WR   = 12;
  localparam int unsigned T_RFC  = 455;
  localparam int unsigned T_REFI = 6825;

  // ---- ASIC (paper, Table 1) ----
  localparam int unsigned SRAM_BYTES = 128 * 1024;
  localparam int unsigned VLANES     = 128;               // multiplier array width
  localparam int unsigned SROW_W     = VLANES * 16;       // 2048-bit SRAM row
  localparam int unsigned SRAM_ROWS  = SRAM_BYTES / (SROW_W / 8);  // 512
  localparam int unsigned SROW_AW    = 9;
  localparam int unsigned SWORD_AW   = 12;  // 256-bit SRAM word address (4096 words)

  // ---- PIM commands (names from the paper's Fig. 3(b) where printed) ----
  typedef enum logic [2:0] {
    CMD_NOP    = 3'd0,
    CMD_ACT    = 3'd1,   // activate a row (one bank, or all banks: ACT_AB)
    CMD_PRE    = 3'd2,   // precharge (one bank or all banks)
    CMD_WR     = 3'd3,   // write a masked 256-bit word into one bank's open row
    CMD_RD     = 3'd4,   // read a 256-bit word from one bank's open row
    CMD_WR_GB  = 3'd5,   // write a 256-bit word into the global buffer
    CMD_MAC_AB = 3'd6,   // all banks: MAC of an open-row word with a GB word
    CMD_RD_MAC = 3'd7    // read the 16 bank accumulators (one BF16 each) and clear
  } pim_cmd_e;

  // Where read data goes once it reaches the ASIC.
  typedef enum logic [1:0] {
    RT_SRAM = 2'd0,   // store into the SRAM buffer at tag.addr (256-bit word)
    RT_KWB  = 2'd1,   // write back as part of a Key row (row-major)
    RT_VWB  = 2'd2    // write back as part of a Value column (column-major)
  } route_e;

  typedef struct packed {
    route_e              route;
    logic [SWORD_AW-1:0] addr;   // RT_SRAM: SRAM word; RT_KWB/RT_VWB: element group index
    logic [11:0]         token;  // RT_KWB/RT_VWB: token position being written
    logic [ROW_AW-1:0]   base;   // RT_KWB/RT_VWB: first bank row reserved for this matrix
    logic [1:0]          rpt;    // RT_KWB: rows per token; RT_VWB: rows per matrix row
  } rd_tag_t;

  typedef struct packed {
    logic                 bcast;  // send to every channel
    logic [CH_AW-1:0]     ch;
    pim_cmd_e             cmd;
    logic                 ab;     // all-bank form of ACT/PRE
    logic [BANK_AW-1:0]   bank;
    logic [ROW_AW-1:0]    row;
    logic [COL_AW-1:0]    col;
    logic [LANES-1:0]     mask;   // per-BF16 write enable for WR / WR_GB
    logic [WORD_W-1:0]    data;
    rd_tag_t              tag;
  } pim_req_t;

  typedef struct packed {
    logic [CH_AW-1:0]  ch;
    logic [WORD_W-1:0] data;
    rd_tag_t           tag;
  } pim_rsp_t;

  // ---- ASIC instructions (this design's own encoding) ----
  typedef enum logic [2:0] {
    OP_PIM    = 3'd0,  // send one PIM command
    OP_GBLOAD = 3'd1,  // copy SRAM words to global buffer words (WR_GB)
    OP_STORE  = 3'd2,  // copy one SRAM word into a bank (WR)
    OP_VOP    = 3'd3,  // computation-engine operation
    OP_SETS   = 3'd4,  // scalar register <- immediate
    OP_WAIT   = 3'd5,  // wait until every outstanding PIM read has returned
    OP_HALT   = 3'd7
  } opcode_e;

  typedef enum logic [3:0] {
    V_ADD   = 4'd0,  // D = A + B               (adder array)
    V_MUL   = 4'd1,  // D = A * B               (multiplier array)
    V_SADD  = 4'd2,  // D = A + S[sa]
    V_SMUL  = 4'd3,  // D = A * S[sa]
    V_EXP   = 4'd4,  // D = exp(A)              (Taylor unit)
    V_TANH  = 4'd5,  // D = tanh(A)             (Taylor unit)
    V_SUM   = 4'd6,  // S[sd] = sum of n elements of A (adder tree)
    S_ADD   = 4'd7,  // S[sd] = S[sa] + S[sb]
    S_MUL   = 4'd8,  // S[sd] = S[sa] * S[sb]
    S_RECIP = 4'd9,  // S[sd] = 1 / S[sa]       (fast reciprocal)
    S_RSQRT = 4'd10  // S[sd] = 1 / sqrt(S[sa]) (fast inverse sqrt)
  } vop_e;

  typedef struct packed {
    vop_e               op;
    logic [SROW_AW-1:0] dst;  // SRAM row
    logic [SROW_AW-1:0] srca;
    logic [SROW_AW-1:0] srcb;
    logic [15:0]        n;    // element count
    logic [2:0]         sd;
    logic [2:0]         sa;
    logic [2:0]         sb;
  } vop_t;

  typedef struct packed {
    opcode_e          opc;
    // OP_PIM / OP_STORE / OP_GBLOAD fields
    logic             bcast;
    logic [CH_AW-1:0] ch;
    pim_cmd_e         cmd;
    logic             ab;
    logic [BANK_AW-1:0] bank;
    logic [ROW_AW-1:0]  row;
    logic [COL_AW-1:0]  col;
    rd_tag_t          tag;     // OP_PIM reads; OP_STORE/OP_GBLOAD: tag.addr = SRAM word
    logic [6:0]       len;     // OP_GBLOAD: number of words
    // OP_VOP / OP_SETS
    vop_t             vop;
    bf16_t            imm;
  } instr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);

endpackage
