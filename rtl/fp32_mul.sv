// fp32_mul: IEEE-754 binary32 multiplier, round-to-nearest-even.
//
// Computes a * b combinationally. Helper of the square-of-differences FU,
// which uses it for (A-B')^2 and for |A-B'| * 2|max dB|. Significands are
// normalised first (so subnormal inputs work), multiplied to 48 bits, the
// product is normalised, shifted right into the subnormal range when the
// exponent underflows, and rounded with guard and sticky bits. Infinities,
// zeros and NaNs (quiet NaN 0x7fc00000, also for inf * 0) follow IEEE-754.
// The paper only asks for a "conventional square"; the structure is this
// design's choice.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        s;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] p;
  logic [24:0] rnd;
  int          xa, xb, e, la, lb, sh;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero, st, up;

  always_comb begin
    s      = a[31] ^ b[31];
    ea     = a[30:23];
    eb     = b[30:23];
    a_nan  = (ea == 8'hff) && (a[22:0] != 0);
    b_nan  = (eb == 8'hff) && (b[22:0] != 0);
    a_inf  = (ea == 8'hff) && (a[22:0] == 0);
    b_inf  = (eb == 8'hff) && (b[22:0] == 0);
    a_zero = (a[30:0] == 0);
    b_zero = (b[30:0] == 0);
    ma = {ea != 0, a[22:0]};
    mb = {eb != 0, b[22:0]};
    xa = ((ea == 8'd0) ? 1 : int'(ea));
    xb = ((eb == 8'd0) ? 1 : int'(eb));
    la = 0;
    lb = 0;
    for (int i = 0; i < 24; i++) if (ma[i]) la = 23 - i;  // ends at the highest one
    for (int i = 0; i < 24; i++) if (mb[i]) lb = 23 - i;
    ma = ma << la;
    mb = mb << lb;
    xa = xa - la;
    xb = xb - lb;
    p  = ma * mb;                     // in [2^46, 2^48)
    e  = xa + xb - 127;
    if (p[47]) e = e + 1;
    else       p = p << 1;
    st  = 1'b0;
    sh  = 0;
    up  = 1'b0;
    rnd = '0;
    y   = '0;
    if (e < 1) begin                  // subnormal result: shift right with sticky
      sh = 1 - e;
      if (sh >= 48) begin
        st = (p != 0);
        p  = '0;
      end else begin
        st = (p & ((48'd1 << sh) - 48'd1)) != 0;
        p  = p >> sh;
      end
      e = 1;
    end
    up  = p[23] && (st || (p[22:0] != 0) || p[24]);
    rnd = {1'b0, p[47:24]} + {24'd0, up};
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 1;
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = 32'h7fc0_0000;
    else if (a_inf || b_inf)  y = {s, 8'hff, 23'd0};
    else if (a_zero || b_zero) y = {s, 31'd0};
    else if (e >= 255)        y = {s, 8'hff, 23'd0};
    else if (rnd[23])         y = {s, 8'(e), rnd[22:0]};
    else                      y = {s, 8'd0, rnd[22:0]};
  end
endmodule
