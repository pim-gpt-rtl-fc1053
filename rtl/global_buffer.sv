// global_buffer: the 2 KB SRAM buffer of one PIM channel.
//
// Holds (a chunk of) the input vector of a vector-matrix multiplication and
// broadcasts one 256-bit word (16 BF16 values) per cycle to the MAC units of
// all 16 banks, as in the paper's channel figure. 2 KB is the paper's size.
// Organisation (this design's choice): 64 words of 256 bits, one write port
// with a per-BF16 lane mask and one synchronous read port (data one cycle
// after the address).
module global_buffer
  import pimgpt_pkg::*;
#(
  parameter int unsigned WORDS = GB_WORDS
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [LANES-1:0]         wmask,
  input  logic [WORD_W-1:0]        wdata,
  input  logic                     re,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [WORD_W-1:0]        rdata
);
  logic [WORD_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we)
      for (int l = 0; l < LANES; l++)
        if (wmask[l]) mem[waddr][16*l +: 16] <= wdata[16*l +: 16];
    if (re) rdata <= mem[raddr];
  end
endmodule
