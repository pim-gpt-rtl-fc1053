// dram_bank: behavioural model of one DRAM bank (cell array, row decoder and
// row buffer). It is not synthesizable logic: a real bank is a 1T1C array made
// in a DRAM process. It stores ROWS rows of 2 KB, each seen as 64 column words
// of 256 bits (16 BF16 values).
//
// act opens row act_row into the row buffer, pre closes it. While a row is
// open, rd_data shows the column word rd_col of that row (combinationally, as
// the row buffer drives the MAC unit), and wr writes the lanes of wr_data
// selected by wr_mask into column wr_col. The model keeps the open row in the
// array directly, which behaves the same as a row buffer that is written back
// on precharge. Timing (tRCD, tRP, tWR) is enforced by the channel controller;
// the model only asserts that columns are accessed with a row open.
module dram_bank
  import pimgpt_pkg::*;
#(
  parameter int unsigned ROWS = BANK_ROWS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     act,
  input  logic [$clog2(ROWS)-1:0]  act_row,
  input  logic                     pre,
  input  logic [COL_AW-1:0]        rd_col,
  output logic [WORD_W-1:0]        rd_data,
  input  logic                     wr,
  input  logic [COL_AW-1:0]        wr_col,
  input  logic [LANES-1:0]         wr_mask,
  input  logic [WORD_W-1:0]        wr_data,
  output logic                     is_open,
  output logic [$clog2(ROWS)-1:0]  open_row
);
    logic [WORD_W-1:0] cells [ROWS * ROW_WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_open  <= 1'b0;
      open_row <= '0;
    end else if (act) begin
      is_open  <= 1'b1;
      open_row <= act_row;
    end else if (pre) begin
      is_open  <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (wr) begin
      for (int l = 0; l < LANES; l++)
        if (wr_mask[l]) cells[{open_row, wr_col}][16*l +: 16] <= wr_data[16*l +: 16];
    end
  end

  assign rd_data = cells[{open_row, rd_col}];

  assert property (@(posedge clk) wr |-> is_open) else $error("dram_bank: write to a closed bank");
  assert property (@(posedge clk) act |-> !is_open) else $error("dram_bank: ACT to an open bank");
endmodule
