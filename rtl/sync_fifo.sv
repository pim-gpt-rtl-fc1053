// sync_fifo: single-clock FIFO with valid/ready on both sides.
//
// Used for the ASIC's Data Queue and Request Queue and for the response queue
// of each PIM channel. The paper names the queues but gives neither depth nor
// protocol; this design uses a circular buffer of DEPTH entries (DEPTH a power
// of two) with first-word fall-through: out_data shows the head entry whenever
// out_valid is high. A push and a pop may happen in the same cycle. count
// reports the occupancy so that a producer with a pipeline in flight can stop
// early.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  T             mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid & in_ready;
  assign pop       = out_valid & out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  initial assert (DEPTH == (1 << AW)) else $error("sync_fifo: DEPTH must be a power of two");
endmodule
