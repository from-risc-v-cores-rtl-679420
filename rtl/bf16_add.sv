// bf16_add -- combinational BF16 adder used in stage 3 of every NPE pipeline.
//
// The operand with the larger magnitude is taken as the base; the other
// significand is shifted right by the exponent difference into a 26-bit field
// (18 bits below the significand; anything shifted further collapses into one
// sticky bit). The two are added or subtracted, the result is normalised with a
// leading-one search, and rounded to nearest-even from the guard bit and the
// OR of the bits below it. Subnormals are flushed to zero, overflow gives
// infinity, infinities propagate (+inf + -inf gives the quiet NaN 0x7FC0),
// and an exact zero sum is +0.
// BF16 arithmetic follows the architecture; rounding and special values are
// this design's own choice.
module bf16_add
  import seneca_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output bf16_t y
);
  bf16_t       x, z;           // |x| >= |z|
  logic [7:0]  d;              // exponent difference
  logic [25:0] mx, mz;
  logic [26:0] s;
  logic [26:0] sn;
  int          lead;
  logic [6:0]  mant;
  logic        guard, sticky, up;
  logic signed [9:0]  e;
  logic signed [16:0] er;
  logic signed [9:0]  ef;

  always_comb begin
    if (a[14:0] >= b[14:0]) begin
      x = a;
      z = b;
    end else begin
      x = b;
      z = a;
    end
    d  = x[14:7] - z[14:7];
    mx = {1'b1, x[6:0], 18'd0};
    if (d > 8'd18) mz = 26'd1;                   // only a sticky bit remains
    else           mz = {1'b1, z[6:0], 18'd0} >> d;
    if (x[15] == z[15]) s = {1'b0, mx} + {1'b0, mz};
    else                s = {1'b0, mx} - {1'b0, mz};

    lead = 0;
    for (int i = 0; i < 27; i++)
      if (s[i]) lead = i;
    sn     = s << (26 - lead);
    mant   = sn[25:19];
    guard  = sn[18];
    sticky = |sn[17:0];
    up     = guard & (sticky | mant[0]);
    e      = $signed({2'b00, x[14:7]}) + 10'(lead) - 10'sd25;
    er     = $signed({e, mant}) + $signed({16'd0, up});
    ef     = er[16:7];

    if (a[14:7] == 8'hFF && b[14:7] == 8'hFF && a[15] != b[15])
      y = 16'h7FC0;
    else if (x[14:7] == 8'hFF)
      y = {x[15], 8'hFF, 7'd0};
    else if (z[14:7] == 8'd0)                    // smaller operand is zero
      y = (x[14:7] == 8'd0) ? 16'd0 : x;
    else if (s == 27'd0)
      y = 16'd0;
    else if (ef >= 10'sd255)
      y = {x[15], 8'hFF, 7'd0};
    else if (ef <= 10'sd0)
      y = 16'd0;
    else
      y = {x[15], er[14:0]};
  end
endmodule
