// fast_invsqrt: pipelined fast inverse square root 1/sqrt(D) of a positive
// BF16 value (the paper's Algorithm 2, after the Quake III method).
//
//   D' = D * 0.5
//   L  = {D, 16'h0000}                 (BF16 bits padded to 32 bits)
//   L' = 32'h5f3759df - (L >> 1);  X = L'[31:16]
//   X  = X * (1.5 - D' * X * X)        (two iterations, as the paper chooses)
// The paper's listing unpacks D' into L while its text says the BF16 input
// is unpacked; the magic-constant estimate is only right for the input itself
// (Quake III does the same), so this unit unpacks D.
// Stage 0: estimate, stages 1..2: iterations. One input per cycle, result
// LATENCY = 3 cycles later with out_valid. Negative inputs and zero are not
// handled (they do not arise for a variance plus epsilon).
module fast_invsqrt
  import pimgpt_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  bf16_t d,
  output logic  out_valid,
  output bf16_t y
);
  localparam bf16_t HALF = 16'h3F00;
  localparam bf16_t C1P5 = 16'h3FC0;

  logic  v  [3];
  bf16_t dh [3];
  bf16_t xq [3];

  bf16_t dhalf;
  logic [31:0] l, lp;   // only lp[31:16] is kept, as the paper packs the high half
  bf16_mul u_h (.a(d), .b(HALF), .y(dhalf));
  always_comb begin
    l  = {d, 16'h0000};
    lp = 32'h5f3759df - (l >> 1);
  end
  always_ff @(posedge clk) begin
    dh[0] <= dhalf; xq[0] <= lp[31:16];
  end

  for (genvar i = 0; i < 2; i++) begin : g_it
    bf16_t xx, dxx, r, xn;
    bf16_mul u_xx (.a(xq[i]), .b(xq[i]), .y(xx));
    bf16_mul u_dx (.a(dh[i]), .b(xx), .y(dxx));
    bf16_add u_r  (.a(C1P5), .b({~dxx[15], dxx[14:0]}), .y(r));
    bf16_mul u_xn (.a(xq[i]), .b(r), .y(xn));
    always_ff @(posedge clk) begin
      dh[i+1] <= dh[i]; xq[i+1] <= xn;
    end
  end
  assign y = xq[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < 3; i++) v[i] <= 1'b0;
    else begin
      v[0] <= in_valid;
      for (int i = 1; i < 3; i++) v[i] <= v[i-1];
    end
  end
  assign out_valid = v[2];
endmodule
