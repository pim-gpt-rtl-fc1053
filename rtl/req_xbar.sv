// req_xbar: request crossbar from the ASIC's request queue to the PIM channels.
//
// The paper's interconnect sends a memory request "to a single channel or
// broadcasting to all channels". A unicast packet is offered to channel
// in.ch only. A broadcast packet (in.bcast) is offered to every channel; each
// channel takes it when it is ready, a mask remembers which channels already
// have it, and the packet leaves the input only when all have taken it, so a
// stalled channel holds the broadcast back without blocking the others from
// accepting. Valid/ready on every port; no buffering of its own.
module req_xbar
  import pimgpt_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  pim_req_t        in,
  output logic [NCH-1:0]  out_valid,
  input  logic [NCH-1:0]  out_ready,
  output pim_req_t        out [NCH]
);
  logic [NCH-1:0] done_q, target, taken;

  always_comb begin
    target = in.bcast ? '1 : (NCH'(1) << in.ch);
    out_valid = (in_valid ? target : '0) & ~done_q;
    taken     = out_valid & out_ready;
    in_ready  = ((done_q | taken) & target) == target;
    for (int c = 0; c < NCH; c++) out[c] = in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_q <= '0;
    else if (in_valid && in_ready) done_q <= '0;
    else done_q <= done_q | taken;
  end
endmodule
