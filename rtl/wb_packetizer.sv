// wb_packetizer: the "Packetizer" between the data queue and the request
// queue. It turns Key and Value results read from the PIM into bank writes in
// the rows reserved for them, so they never pass through the SRAM buffer.
//
// A response carries 16 results (element group g = tag.addr + rsp.ch, elements
// j = 16 g .. 16 g + 15) of the new token t = tag.token. The paper stores Key
// rows row-major and Value rows column-major and spreads both over all
// channels and banks; the exact formulas are this design's own:
//  Key  (RT_KWB): token t is matrix row t, kept in bank t mod 16 of channel
//       (t / 16) mod 8, DRAM row base + (t / 128) * rpt + g / 64, column word
//       g mod 64. The 16 results are one word: one WR packet.
//  Value (RT_VWB): element j is matrix row j, kept in bank j mod 16 of channel
//       (j / 16) mod 8 = g mod 8, DRAM row base + (g / 8) * rpt + t / 1024,
//       element t mod 1024. The 16 results go to 16 banks: 16 WR packets, each
//       writing one lane.
// One packet leaves per cycle; in_ready is high only when the last packet of
// the current response leaves.
module wb_packetizer
  import pimgpt_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  pim_rsp_t in,
  output logic     out_valid,
  input  logic     out_ready,
  output pim_req_t out
);
  logic [3:0]  lane_q;
  logic [11:0] g, t;
  logic        last;

  always_comb begin
    g = in.tag.addr + 12'(in.ch);
    t = in.tag.token;
    out = '0;
    out.cmd   = CMD_WR;
    out.bcast = 1'b0;
    out.tag   = in.tag;
    if (in.tag.route == RT_KWB) begin
      out.bank = t[3:0];
      out.ch   = t[6:4];
      out.row  = in.tag.base + ROW_AW'(t >> 7) * ROW_AW'(in.tag.rpt) + ROW_AW'(g >> 6);
      out.col  = g[5:0];
      out.mask = '1;
      out.data = in.data;
      last     = 1'b1;
    end else begin
      out.bank = lane_q;
      out.ch   = g[2:0];
      out.row  = in.tag.base + ROW_AW'(g >> 3) * ROW_AW'(in.tag.rpt) + ROW_AW'(t >> 10);
      out.col  = t[9:4];
      out.mask = LANES'(1) << t[3:0];
      out.data = {LANES{in.data[16*lane_q +: 16]}};
      last     = (lane_q == 4'd15);
    end
    out_valid = in_valid;
    in_ready  = out_ready & last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lane_q <= '0;
    else if (in_valid && out_ready && in.tag.route == RT_VWB) lane_q <= lane_q + 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in.tag.route != RT_SRAM)
    else $error("wb_packetizer: SRAM-routed data");
endmodule
