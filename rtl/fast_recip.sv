// fast_recip: pipelined Newton-Raphson reciprocal 1/D of a BF16 value, built
// from BF16 multipliers and adders (the paper's Algorithm 1).
//
//   D' = |D| / 2^(E+1)                (exponent field set to 126: D' in [0.5,1))
//   X  = 48/17 - 32/17 * D'           (stage 0)
//   X  = X + X * (1 - D' * X)         (stages 1..3: three iterations, as the
//                                      paper gives for 16-bit precision)
//   1/D = sign(D) * X / 2^(E+1)       (stage 4: exponent subtraction)
// One input per cycle, result LATENCY = 5 cycles later with out_valid.
// D = 0 gives infinity; results beyond the BF16 range saturate to infinity or
// flush to zero (this design's choice, the paper does not say).
module fast_recip
  import pimgpt_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  bf16_t d,
  output logic  out_valid,
  output bf16_t y
);
  localparam bf16_t C48_17  = 16'h4035;
  localparam bf16_t CM32_17 = 16'hBFF1;
  localparam bf16_t ONE     = 16'h3F80;

  logic  v  [5];
  bf16_t dp [4];
  bf16_t xq [4];
  logic  sg [4];
  logic [7:0] ef [4];

  bf16_t dprime, m0, x0;
  assign dprime = {1'b0, 8'd126, d[6:0]};
  bf16_mul u_m0 (.a(CM32_17), .b(dprime), .y(m0));
  bf16_add u_a0 (.a(C48_17), .b(m0), .y(x0));

  always_ff @(posedge clk) begin
    dp[0] <= dprime; xq[0] <= x0; sg[0] <= d[15]; ef[0] <= d[14:7];
  end

  for (genvar i = 0; i < 3; i++) begin : g_it
    bf16_t t, u, w, xn;
    bf16_mul u_t (.a(dp[i]), .b(xq[i]), .y(t));
    bf16_add u_u (.a(ONE), .b({~t[15], t[14:0]}), .y(u));
    bf16_mul u_w (.a(xq[i]), .b(u), .y(w));
    bf16_add u_x (.a(xq[i]), .b(w), .y(xn));
    always_ff @(posedge clk) begin
      dp[i+1] <= dp[i]; xq[i+1] <= xn; sg[i+1] <= sg[i]; ef[i+1] <= ef[i];
    end
  end

  // stage 4: scale by 2^-(E+1): new exponent field = exp(X) - ef + 126
  logic signed [10:0] ne;
  always_comb ne = 11'(xq[3][14:7]) - 11'(ef[3]) + 11'sd126;
  always_ff @(posedge clk) begin
    if (ef[3] == 8'd0)        y <= {sg[3], 8'hFF, 7'd0};
    else if (ef[3] == 8'hFF)  y <= {sg[3], 15'd0};
    else if (ne <= 0)         y <= {sg[3], 15'd0};
    else if (ne >= 255)       y <= {sg[3], 8'hFF, 7'd0};
    else                      y <= {sg[3], ne[7:0], xq[3][6:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < 5; i++) v[i] <= 1'b0;
    else begin
      v[0] <= in_valid;
      for (int i = 1; i < 5; i++) v[i] <= v[i-1];
    end
  end
  assign out_valid = v[4];
endmodule
