// bf16_mul: combinational bfloat16 multiplier (a * b), round to nearest even.
//
// The paper says only that the multipliers "follow the standard floating-point
// unit design". The 8 x 8 significand product (16 bits) is normalised by at
// most one place and rounded to nearest even on the discarded bits.
// Simplifications (this design's choice): subnormal inputs read as zero,
// subnormal results flush to signed zero, an exponent of 255 on either input
// gives infinity (NaN not distinguished), overflow gives infinity.
module bf16_mul
  import pimgpt_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output bf16_t y
);
  logic        s;
  logic [7:0]  ma, mb;
  logic [15:0] p;
  logic [9:0]  e;
  logic [7:0]  keep;
  logic        guard, stick, rup;
  logic [8:0]  mr;

  always_comb begin
    s  = a[15] ^ b[15];
    ma = {1'b1, a[6:0]};
    mb = {1'b1, b[6:0]};
    p  = ma * mb;
    e  = {2'b0, a[14:7]} + {2'b0, b[14:7]} - 10'd127;
    if (p[15]) begin
      keep = p[15:8]; guard = p[7]; stick = (p[6:0] != 7'd0); e = e + 10'd1;
    end else begin
      keep = p[14:7]; guard = p[6]; stick = (p[5:0] != 6'd0);
    end
    rup = guard & (stick | keep[0]);
    mr  = {1'b0, keep} + {8'd0, rup};
    if (mr[8]) e = e + 10'd1;

    if (a[14:7] == 8'hFF || b[14:7] == 8'hFF)      y = {s, 8'hFF, 7'd0};
    else if (a[14:7] == 8'd0 || b[14:7] == 8'd0)   y = {s, 15'd0};
    else if ($signed(e) <= 0)                      y = {s, 15'd0};
    else if (e >= 10'd255)                         y = {s, 8'hFF, 7'd0};
    else                                           y = {s, e[7:0], mr[8] ? mr[7:1] : mr[6:0]};
  end
endmodule
