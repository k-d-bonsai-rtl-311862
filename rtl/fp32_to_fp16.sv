// fp32_to_fp16: single- to half-precision conversion used on the LDSPZPB
// load path of the ZipPts buffer.
//
// Purely combinational. The input is an IEEE-754 binary32 value, the output the
// nearest IEEE-754 binary16 value under round-to-nearest-even, the default
// rounding mode the error analysis of K-D Bonsai assumes (the 13 dropped
// mantissa bits round the remaining 10). Values beyond the half-precision
// range become infinity, values below half the smallest subnormal become zero,
// half-precision subnormals are produced exactly, NaNs stay NaNs (quiet).
// Overflow and subnormal handling follow IEEE-754; the paper only states that
// point-cloud coordinates stay within the half-precision range.
module fp32_to_fp16 (
  input  logic [31:0] f_in,   // binary32
  output logic [15:0] h_out   // binary16
);
  logic        s;
  logic [7:0]  e8;
  logic [22:0] m23;
  logic [23:0] sig;
  int          ue;          // unbiased exponent
  int          sh;          // right shift for subnormal results
  logic [10:0] q;           // truncated result (exponent carry may ripple)
  logic        rnd, sticky;
  logic [14:0] mag;

  assign s   = f_in[31];
  assign e8  = f_in[30:23];
  assign m23 = f_in[22:0];
  assign sig = {1'b1, m23};

  always_comb begin
    ue     = int'(e8) - 127;
    sh     = 0;
    q      = '0;
    rnd    = 1'b0;
    sticky = 1'b0;
    mag    = '0;
    if (e8 == 8'hff) begin
      mag = (m23 != '0) ? {5'h1f, 1'b1, m23[21:13]} : {5'h1f, 10'd0};
    end else if (e8 == 8'h00) begin
      mag = '0;                                   // |x| < 2^-126: rounds to zero
    end else if (ue > 15) begin
      mag = {5'h1f, 10'd0};                       // overflow
    end else if (ue >= -14) begin
      rnd    = m23[12];
      sticky = |m23[11:0];
      mag    = {5'(ue + 15), m23[22:13]};
      if (rnd && (sticky || m23[13])) mag = mag + 15'd1;  // carry may reach inf
    end else begin
      // subnormal result: q = sig * 2^(ue+1), in units of 2^-24
      sh = -ue - 1;                               // 14 .. 125
      if (sh <= 24) begin
        q      = 11'(sig >> sh);
        rnd    = sig[sh-1];
        sticky = (sig & ((24'd1 << (sh - 1)) - 24'd1)) != '0;
        if (rnd && (sticky || q[0])) q = q + 11'd1;
        mag = {4'd0, q};                          // q = 1024 gives the min normal
      end else begin
        mag = '0;
      end
    end
  end

  assign h_out = {s, mag};
endmodule
