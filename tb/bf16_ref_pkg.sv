// bf16_ref_pkg -- reference BF16 arithmetic for the testbenches, computed
// through double-precision reals instead of the bit-level datapath of the
// RTL: operands are widened to real, the operation is done exactly (or nearly
// so) in double precision, and the result is rounded to nearest-even into
// BF16 with the same flush-to-zero and overflow-to-infinity rules as the NPEs.
package bf16_ref_pkg;

  function automatic real bf2r(logic [15:0] a);
    logic [63:0] d;
    if (a[14:7] == 8'd0) return 0.0;
    d = {a[15], 11'(int'(a[14:7]) - 127 + 1023), a[6:0], 45'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [15:0] r2bf(real r);
    logic [63:0] d;
    logic [6:0]  m;
    logic        g, st, up;
    int          e;
    if (r == 0.0) return 16'd0;
    d  = $realtobits(r);
    e  = int'(d[62:52]) - 1023 + 127;
    m  = d[51:45];
    g  = d[44];
    st = |d[43:0];
    up = g & (st | m[0]);
    if (up) begin
      if (m == 7'h7F) begin m = 7'd0; e = e + 1; end
      else m = m + 7'd1;
    end
    if (e >= 255) return {d[63], 8'hFF, 7'd0};
    if (e <= 0)   return {d[63], 15'd0};
    return {d[63], 8'(e), m};
  endfunction

  function automatic logic [15:0] ref_add(logic [15:0] a, logic [15:0] b);
    return r2bf(bf2r(a) + bf2r(b));
  endfunction
  function automatic logic [15:0] ref_mul(logic [15:0] a, logic [15:0] b);
    return r2bf(bf2r(a) * bf2r(b));
  endfunction

  // equal, counting +0 and -0 as the same value
  function automatic logic bf_eq(logic [15:0] a, logic [15:0] b);
    return (a == b) || (a[14:0] == 15'd0 && b[14:0] == 15'd0);
  endfunction

  // random finite BF16 with exponent in [127-span, 127+span]
  function automatic logic [15:0] rnd_bf(int span);
    int e;
    e = 127 - span + int'($urandom_range(0, 2 * span));
    return {1'($urandom), 8'(e), 7'($urandom)};
  endfunction

endpackage
