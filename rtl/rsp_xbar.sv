// rsp_xbar: response crossbar from the PIM channels into the ASIC's data queue.
//
// The paper's interconnect supports "data fetching from any DRAM channel".
// Here every channel offers its read data and a round-robin arbiter grants one
// per cycle: the search starts at the channel after the one last granted, so
// no channel waits more than NCH-1 grants. Valid/ready on every port.
module rsp_xbar
  import pimgpt_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NCH-1:0] in_valid,
  output logic [NCH-1:0] in_ready,
  input  pim_rsp_t       in [NCH],
  output logic           out_valid,
  input  logic           out_ready,
  output pim_rsp_t       out
);
  localparam int unsigned CW = $clog2(NCH);
  logic [CW-1:0] last_q, gnt;
  logic          found;

  always_comb begin
    found = 1'b0;
    gnt   = last_q;
    for (int k = 1; k <= NCH; k++) begin
      if (!found && in_valid[CW'((int'(last_q) + k) % NCH)]) begin
        found = 1'b1;
        gnt   = CW'((int'(last_q) + k) % NCH);
      end
    end
    out_valid = found;
    out       = in[gnt];
    in_ready  = '0;
    in_ready[gnt] = found & out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_q <= CW'(NCH - 1);
    else if (out_valid && out_ready) last_q <= gnt;
  end
endmodule
