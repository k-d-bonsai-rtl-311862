// fp16_to_fp32: exact widening of an IEEE-754 binary16 value to binary32.
//
// This is the "ext" step of the square-of-differences FU: the 16-bit
// coordinate B' is widened without changing its value so that the arithmetic
// runs in 32-bit hardware. Combinational. Half-precision subnormals are
// normalised (they are normal numbers in binary32), infinities and NaNs keep
// their class and payload.
module fp16_to_fp32 (
  input  logic [15:0] h_in,
  output logic [31:0] f_out
);
  logic       s;
  logic [4:0] e5;
  logic [9:0] m10;
  int         p;            // position of the leading one of a subnormal
  logic [9:0] mn;

  assign s   = h_in[15];
  assign e5  = h_in[14:10];
  assign m10 = h_in[9:0];

  always_comb begin
    p  = 0;
    mn = '0;
    for (int i = 0; i < 10; i++) if (m10[i]) p = i;
    if (e5 == 5'h1f) begin
      f_out = {s, 8'hff, m10, 13'd0};
    end else if (e5 == 5'd0) begin
      if (m10 == '0) begin
        f_out = {s, 31'd0};
      end else begin
        mn    = m10 << (10 - p);                 // drop the leading one
        f_out = {s, 8'(p + 103), mn, 13'd0};     // value m10 * 2^-24
      end
    end else begin
      f_out = {s, 8'(int'(e5) + 112), m10, 13'd0};
    end
  end
endmodule
