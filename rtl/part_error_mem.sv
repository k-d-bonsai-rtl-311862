// part_error_mem: the 32-line "part error" table of the square-of-differences FU.
//
// Rounding a binary32 value to binary16 moves it by at most half a unit in the
// last place, max(dB) = 2^(e-15) * 2^-11 = 2^(e-26) for a half-precision
// exponent field e. The FU needs 2|max(dB)| and max(dB)^2; both depend only on
// the 5-bit exponent of B', so they are tabulated for all 32 exponent values
// and read with that exponent. The entries are exact powers of two in
// binary32:
//   two_dmax(e) = 2^(e-25)   -> exponent field e + 102
//   dmax_sq(e)  = 2^(2e-52)  -> exponent field 2e + 75
// For e = 0 (half-precision subnormals, whose spacing is 2^-24) the table uses
// e = 1, which gives the true bound 2^-25; the paper's formula evaluated at
// e = 0 would understate it by a factor of two. Line 31 (infinity/NaN) holds
// the formula's value; it is never meaningful.
// The table is a read-only memory computed from the formula, read
// combinationally (the paper looks it up "in the beginning of the operation").
module part_error_mem (
  input  logic [4:0]  exp_in,      // exponent field of B'
  output logic [31:0] two_dmax,    // 2 * |max(dB)|, binary32
  output logic [31:0] dmax_sq      // max(dB)^2,      binary32
);
  logic [63:0] rom [32];

  always_comb begin
    for (int e = 0; e < 32; e++) begin
      automatic int ee = (e == 0) ? 1 : e;
      rom[e] = {1'b0, 8'(ee + 102), 23'd0, 1'b0, 8'(2 * ee + 75), 23'd0};
    end
  end

  assign two_dmax = rom[exp_in][63:32];
  assign dmax_sq  = rom[exp_in][31:0];
endmodule
