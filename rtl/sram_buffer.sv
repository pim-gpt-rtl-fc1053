// sram_buffer: the ASIC's 128 KB on-chip SRAM.
//
// Holds input vectors, partial VMM sums and all intermediate vectors of the
// non-VMM functions. 128 KB is the paper's size. Organisation (this design's
// choice): ROWS rows of 2048 bits, one row being the 128 BF16 values the
// computation engine's multiplier array takes per cycle. Each row is split
// into 8 words of 256 bits, the unit the PIM channels send and receive. Two
// synchronous read ports (row, data one cycle later) feed the two operands
// of the engine; one write port writes any of the 8 words of a row
// (wmask bit k = word k).
module sram_buffer
  import pimgpt_pkg::*;
#(
  parameter int unsigned ROWS = SRAM_ROWS
) (
  input  logic                    clk,
  input  logic                    rea,
  input  logic [$clog2(ROWS)-1:0] raddra,
  output logic [SROW_W-1:0]       rdataa,
  input  logic                    reb,
  input  logic [$clog2(ROWS)-1:0] raddrb,
  output logic [SROW_W-1:0]       rdatab,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  logic [7:0]              wmask,
  input  logic [SROW_W-1:0]       wdata
);
  logic [SROW_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we)
      for (int k = 0; k < 8; k++)
        if (wmask[k]) mem[waddr][WORD_W*k +: WORD_W] <= wdata[WORD_W*k +: WORD_W];
    if (rea) rdataa <= mem[raddra];
    if (reb) rdatab <= mem[raddrb];
  end
endmodule
