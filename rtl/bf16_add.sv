// bf16_add: combinational bfloat16 adder (a + b), round to nearest even.
//
// The paper says only that the ASIC adders "follow the standard floating-point
// unit design"; this is one such design. Both significands (hidden bit
// included) are placed in a 33-bit field with 24 extension bits; the smaller
// operand is shifted right by the exponent difference with a sticky bit, the
// two are added or subtracted, the result is normalised with a leading-one
// search and rounded to nearest even.
// Simplifications (this design's choice): subnormal inputs are read as zero
// and subnormal results are flushed to zero; an exponent of 255 on either
// input gives infinity of that sign (NaN is not distinguished); overflow gives
// infinity. The result of x + (-x) is +0.
module bf16_add
  import pimgpt_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output bf16_t y
);
  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [7:0]  ma, mb, ml, ms;
  logic [8:0]  d;
  logic [32:0] big, sml, sum;
  logic        sticky, round_up;
  logic [5:0]  lz;
  logic [9:0]  e_res;
  logic [32:0] norm;
  logic [8:0]  mant_r;

  always_comb begin
    sa = a[15]; ea = a[14:7]; ma = (ea == 8'd0) ? 8'd0 : {1'b1, a[6:0]};
    sb = b[15]; eb = b[14:7]; mb = (eb == 8'd0) ? 8'd0 : {1'b1, b[6:0]};
    // order by magnitude
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end
    d      = {1'b0, el} - {1'b0, es};
    big    = {1'b0, ml, 24'd0};
    sticky = 1'b0;
    if (d >= 9'd32) begin
      sml  = 33'd0;
      sticky = (ms != 8'd0);
    end else begin
      sml  = {1'b0, ms, 24'd0} >> d;
      sticky = ((({1'b0, ms, 24'd0}) & ((33'd1 << d) - 33'd1)) != 33'd0);
    end
    sml = sml | {32'd0, sticky};
    if (sl == ss) sum = big + sml;
    else          sum = big - sml;
    // leading one position (bit 32 .. 0)
    lz = 6'd33;
    for (int i = 0; i <= 32; i++) if (sum[i]) lz = 6'(32 - i);
    norm   = sum << lz;             // leading one now at bit 32
    e_res  = {2'b0, el} + 10'd1 - {4'b0, lz};
    // keep bits 32..25 (8 bits), guard bit 24, sticky below
    round_up = norm[24] & ((norm[23:0] != 24'd0) | norm[25]);
    mant_r   = {1'b0, norm[32:25]} + {8'd0, round_up};
    if (mant_r[8]) e_res = e_res + 10'd1;

    if (ea == 8'hFF || eb == 8'hFF) begin
      y = {(ea == 8'hFF) ? sa : sb, 8'hFF, 7'd0};
    end else if (sum == 33'd0) begin
      y = 16'h0000;
    end else if ($signed(e_res) <= 0) begin
      y = {sl, 15'd0};
    end else if (e_res >= 10'd255) begin
      y = {sl, 8'hFF, 7'd0};
    end else begin
      y = {sl, e_res[7:0], mant_r[8] ? mant_r[7:1] : mant_r[6:0]};
    end
  end
endmodule
