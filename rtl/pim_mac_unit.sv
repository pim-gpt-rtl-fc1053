// pim_mac_unit: the MAC unit placed next to each DRAM bank.
//
// Follows the paper's figure of the unit: 16 BF16 multipliers take 16 vector
// values from the global buffer and 16 weights from the bank's row buffer
// (two 256-bit words, 16 x 16 b each), and an adder tree of 8 + 4 + 2 + 1
// adders reduces the 16 products to one value. The paper's command stream
// (MAC_AB ... RD_MAC) implies that several MAC commands are summed before the
// result is read; this design keeps that sum in one accumulator register fed
// by a 16th adder (its own choice).
//
// Timing: when mac_en is high the tree output is added to the accumulator at
// the clock edge. When rd_en is high the accumulator is copied to result
// (result_valid high the next cycle) and cleared. mac_en and rd_en are never
// high together (the channel issues one command per cycle).
module pim_mac_unit
  import pimgpt_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mac_en,
  input  logic              rd_en,
  input  logic [WORD_W-1:0] vec,    // 16 BF16 values from the global buffer
  input  logic [WORD_W-1:0] wgt,    // 16 BF16 values from the row buffer
  output bf16_t             result,
  output logic              result_valid
);
  bf16_t prod [16];
  bf16_t l1 [8];
  bf16_t l2 [4];
  bf16_t l3 [2];
  bf16_t tree, acc_q, acc_d;

  for (genvar i = 0; i < 16; i++) begin : g_mul
    bf16_mul u_mul (.a(vec[16*i +: 16]), .b(wgt[16*i +: 16]), .y(prod[i]));
  end
  for (genvar i = 0; i < 8; i++) begin : g_l1
    bf16_add u_add (.a(prod[2*i]), .b(prod[2*i+1]), .y(l1[i]));
  end
  for (genvar i = 0; i < 4; i++) begin : g_l2
    bf16_add u_add (.a(l1[2*i]), .b(l1[2*i+1]), .y(l2[i]));
  end
  for (genvar i = 0; i < 2; i++) begin : g_l3
    bf16_add u_add (.a(l2[2*i]), .b(l2[2*i+1]), .y(l3[i]));
  end
  bf16_add u_root (.a(l3[0]), .b(l3[1]), .y(tree));
  bf16_add u_acc  (.a(acc_q), .b(tree), .y(acc_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0; result <= '0; result_valid <= 1'b0;
    end else begin
      result_valid <= rd_en;
      if (rd_en) begin
        result <= acc_q;
        acc_q  <= '0;
      end else if (mac_en) begin
        acc_q  <= acc_d;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(mac_en && rd_en))
    else $error("pim_mac_unit: MAC and read in the same cycle");
endmodule
