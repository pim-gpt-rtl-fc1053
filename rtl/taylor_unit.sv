// taylor_unit: pipelined Taylor-series evaluation of e^x or tanh(x) on TL
// BF16 lanes, using only BF16 multipliers and adders.
//
// The paper computes e^x and tanh(x) "using Taylor series approximation with
// the first six items". Both series are evaluated here in Horner form:
//   e^x    = 1 + x(1 + x(1/2 + x(1/6 + x(1/24 + x/120))))
//   tanh x = x (1 + y(-1/3 + y(2/15 + y(-17/315 + y(62/2835 - y 1382/155925)))))
//            with y = x^2
// Stage 0 forms y (x, or x*x for tanh), stages 1..5 each do one
// multiply-add p = p*y + c_k, stage 6 multiplies by x for tanh. Every stage
// is registered: a new set of TL inputs is accepted every cycle and the
// result appears LATENCY = 7 cycles later with out_valid. The series is
// accurate only near zero (|x| below about 1 for tanh, a few units for e^x);
// the paper relies on the data range being limited and so does this unit.
// Coefficients are the series terms rounded to BF16.
module taylor_unit
  import pimgpt_pkg::*;
#(
  parameter int unsigned TL = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         is_tanh,
  input  bf16_t        x [TL],
  output logic         out_valid,
  output bf16_t        y [TL]
);
  localparam int unsigned NS = 5;
  // exp: 1/120 | 1/24, 1/6, 1/2, 1, 1      tanh: -1382/155925 | 62/2835, -17/315, 2/15, -1/3, 1
  localparam bf16_t EXP_TOP  = 16'h3C09;
  localparam bf16_t TANH_TOP = 16'hBC11;
  localparam bf16_t EXP_C  [NS] = '{16'h3D2B, 16'h3E2B, 16'h3F00, 16'h3F80, 16'h3F80};
  localparam bf16_t TANH_C [NS] = '{16'h3CB3, 16'hBD5D, 16'h3E09, 16'hBEAB, 16'h3F80};

  logic  v   [NS+2];
  logic  th  [NS+2];
  bf16_t xs  [NS+1][TL];   // x carried along
  bf16_t ys  [NS+1][TL];   // x or x^2
  bf16_t ps  [NS+2][TL];   // Horner partial

  // stage 0
  for (genvar l = 0; l < TL; l++) begin : g_s0
    bf16_t sq;
    bf16_mul u_sq (.a(x[l]), .b(x[l]), .y(sq));
    always_ff @(posedge clk) begin
      xs[0][l] <= x[l];
      ys[0][l] <= is_tanh ? sq : x[l];
      ps[0][l] <= is_tanh ? TANH_TOP : EXP_TOP;
    end
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin v[0] <= 1'b0; th[0] <= 1'b0; end
    else begin v[0] <= in_valid; th[0] <= is_tanh; end

  // stages 1..5: p = p*y + c
  for (genvar s = 0; s < NS; s++) begin : g_st
    for (genvar l = 0; l < TL; l++) begin : g_l
      bf16_t m, a;
      bf16_mul u_m (.a(ps[s][l]), .b(ys[s][l]), .y(m));
      bf16_add u_a (.a(m), .b(th[s] ? TANH_C[s] : EXP_C[s]), .y(a));
      always_ff @(posedge clk) begin
        xs[s+1][l] <= xs[s][l];
        ys[s+1][l] <= ys[s][l];
        ps[s+1][l] <= a;
      end
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin v[s+1] <= 1'b0; th[s+1] <= 1'b0; end
      else begin v[s+1] <= v[s]; th[s+1] <= th[s]; end
  end

  // stage 6: tanh multiplies by x
  for (genvar l = 0; l < TL; l++) begin : g_s6
    bf16_t m;
    bf16_mul u_m (.a(ps[NS][l]), .b(xs[NS][l]), .y(m));
    always_ff @(posedge clk) ps[NS+1][l] <= th[NS] ? m : ps[NS][l];
    assign y[l] = ps[NS+1][l];
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin v[NS+1] <= 1'b0; th[NS+1] <= 1'b0; end
    else begin v[NS+1] <= v[NS]; th[NS+1] <= th[NS]; end
  assign out_valid = v[NS+1];
endmodule
