// bf16_mul -- combinational BF16 (brain float 16) multiplier used in stage 2 of
// every NPE pipeline.
//
// The 8-bit significands (hidden one plus 7 stored bits) are multiplied into a
// 16-bit product, normalised by at most one place, and rounded to nearest-even
// with a guard bit and a sticky bit. Subnormal inputs and results are flushed
// to zero, results that overflow become infinity, and an infinite input gives
// infinity (infinity times zero gives the quiet NaN 0x7FC0).
// BF16 arithmetic follows the architecture; the rounding and special-value
// rules are this design's own.
module bf16_mul
  import seneca_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output bf16_t y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [15:0] prod;
  logic [6:0]  mant;
  logic        guard, sticky, up;
  logic signed [9:0] e;
  logic signed [16:0] er;   // {exponent, mantissa} after rounding
  logic signed [9:0]  ef;   // exponent after rounding

  always_comb begin
    sa   = a[15];
    sb   = b[15];
    ea   = a[14:7];
    eb   = b[14:7];
    sy   = sa ^ sb;
    prod = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    if (prod[15]) begin
      mant   = prod[14:8];
      guard  = prod[7];
      sticky = |prod[6:0];
      e      = $signed({2'b00, ea}) + $signed({2'b00, eb}) - 10'sd126;
    end else begin
      mant   = prod[13:7];
      guard  = prod[6];
      sticky = |prod[5:0];
      e      = $signed({2'b00, ea}) + $signed({2'b00, eb}) - 10'sd127;
    end
    up = guard & (sticky | mant[0]);
    er = $signed({e, mant}) + $signed({16'd0, up});
    ef = er[16:7];
    if ((ea == 8'hFF && eb == 8'd0) || (eb == 8'hFF && ea == 8'd0))
      y = 16'h7FC0;
    else if (ea == 8'hFF || eb == 8'hFF)
      y = {sy, 8'hFF, 7'd0};
    else if (ea == 8'd0 || eb == 8'd0)
      y = {sy, 15'd0};
    else if (ef >= 10'sd255)
      y = {sy, 8'hFF, 7'd0};
    else if (ef <= 10'sd0)
      y = {sy, 15'd0};
    else
      y = {sy, er[14:0]};
  end
endmodule
