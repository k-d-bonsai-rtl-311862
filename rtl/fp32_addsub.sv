// fp32_addsub: IEEE-754 binary32 adder/subtracter, round-to-nearest-even.
//
// Computes a + b, or a - b when sub is set. Combinational. Helper of the
// square-of-differences FU, which uses it for A - B' and for the final
// 2|A-B'||max dB| + max(dB)^2 sum. The classic structure is used: order the
// operands by magnitude, align the smaller one with three guard bits
// (guard, round, sticky), add or subtract the 24-bit significands, normalise,
// round. Subnormal inputs and outputs, infinities and NaNs (returned as the
// quiet NaN 0x7fc00000) are handled; an exact zero difference is +0.
// The paper only asks for "conventional subtraction"; the structure is this
// design's choice.
module fp32_addsub (
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        sub,
  output logic [31:0] y
);
  logic        sa, sb, sx, sy_, eff_sub;
  logic [7:0]  ea, eb, ex, ey;
  logic [23:0] ma, mb, mx, my;
  logic [26:0] mx_e, my_e, my_sh;
  logic [27:0] sum;
  logic [24:0] rnd;
  int          d, e, lz, shl;
  logic        a_nan, b_nan, a_inf, b_inf, up;

  always_comb begin
    sa = a[31];
    sb = b[31] ^ sub;
    ea = a[30:23];
    eb = b[30:23];
    ma = {ea != 0, a[22:0]};
    mb = {eb != 0, b[22:0]};
    a_nan = (ea == 8'hff) && (a[22:0] != 0);
    b_nan = (eb == 8'hff) && (b[22:0] != 0);
    a_inf = (ea == 8'hff) && (a[22:0] == 0);
    b_inf = (eb == 8'hff) && (b[22:0] == 0);
    // order by magnitude: x is the larger operand
    if ({ea, a[22:0]} >= {eb, b[22:0]}) begin
      sx = sa; ex = ea; mx = ma; sy_ = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy_ = sa; ey = ea; my = ma;
    end
    eff_sub = sx ^ sy_;
    // subnormals have an effective exponent of 1
    d     = ((ex == 8'd0) ? 1 : int'(ex)) - ((ey == 8'd0) ? 1 : int'(ey));
    mx_e  = {mx, 3'b000};
    my_e  = {my, 3'b000};
    if (d >= 27) my_sh = {26'd0, my != 0};
    else         my_sh = (my_e >> d) | {26'd0, (my_e & ((27'd1 << d) - 27'd1)) != 0};
    sum   = eff_sub ? ({1'b0, mx_e} - {1'b0, my_sh}) : ({1'b0, mx_e} + {1'b0, my_sh});
    e     = ((ex == 8'd0) ? 1 : int'(ex));
    lz    = 0;
    shl   = 0;
    up    = 1'b0;
    rnd   = '0;
    y     = '0;
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = 32'h7fc0_0000;
    end else if (a_inf || b_inf) begin
      y = {a_inf ? sa : sb, 8'hff, 23'd0};
    end else if (sum == 0) begin
      y = (sa & sb) ? 32'h8000_0000 : 32'h0000_0000;   // -0 only for (-0)+(-0)
    end else begin
      if (sum[27]) begin                                // carry out: shift right
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 1;
      end else begin                                    // normalise left
        for (int i = 26; i >= 0; i--) if (sum[i] && lz == 0) lz = 27 - i;
        lz  = lz - 1;                                   // leading zeros above bit 26
        shl = (lz < e - 1) ? lz : e - 1;
        sum = sum << shl;
        e   = e - shl;
      end
      up  = sum[2] && ((sum[1] | sum[0]) || sum[3]);
      rnd = {1'b0, sum[26:3]} + {24'd0, up};
      if (rnd[24]) begin
        rnd = rnd >> 1;
        e   = e + 1;
      end
      if (e >= 255)     y = {sx, 8'hff, 23'd0};
      else if (rnd[23]) y = {sx, 8'(e), rnd[22:0]};
      else              y = {sx, 8'd0, rnd[22:0]};      // subnormal result
    end
  end
endmodule
