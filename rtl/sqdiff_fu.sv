// sqdiff_fu: approximate square-of-differences functional unit, (A-B')^2 FU.
//
// For a binary32 operand A (a query coordinate) and a binary16 operand B'
// (a compressed leaf coordinate) it returns, in binary32,
//   sq_diff = (A - B')^2
//   error   = max(eps_sd) = 2*|max(dB)| * |A - B'| + max(dB)^2
// i.e. the squared difference and the worst-case error that rounding B to B'
// can have introduced into it. B' is first widened to binary32 without
// changing its value ("ext"), the subtraction, square, product and sum run in
// binary32; the two error terms come from the 32-line part error table looked
// up with B''s exponent, and |A - B'| is shared by both paths, as in the
// paper's figure of this FU.
//
// Timing (this design's choice; the paper gives no latency): a three-stage
// pipeline, one operation accepted per cycle, results valid 3 cycles after
// in_valid.
//   stage 1: widen B', A - B', table look-up
//   stage 2: (A-B')^2 and |A-B'| * 2|max dB|
//   stage 3: + max(dB)^2
// Reset clears only the valid bits.
module sqdiff_fu (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,          // op1: binary32
  input  logic [15:0] b_h,        // op2: binary16
  output logic        out_valid,
  output logic [31:0] sq_diff,
  output logic [31:0] error
);
  // stage 1
  logic [31:0] b_f, diff, two_dmax, dmax_sq;
  fp16_to_fp32   u_ext (.h_in(b_h), .f_out(b_f));
  fp32_addsub    u_sub (.a(a), .b(b_f), .sub(1'b1), .y(diff));
  part_error_mem u_pem (.exp_in(b_h[14:10]), .two_dmax(two_dmax), .dmax_sq(dmax_sq));

  logic        v1, v2;
  logic [31:0] diff1, two_dmax1, dmax_sq1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end
  always_ff @(posedge clk) begin
    diff1     <= diff;
    two_dmax1 <= two_dmax;
    dmax_sq1  <= dmax_sq;
  end

  // stage 2
  logic [31:0] sq, err_lin;
  fp32_mul u_sq  (.a(diff1), .b(diff1), .y(sq));
  fp32_mul u_lin (.a({1'b0, diff1[30:0]}), .b(two_dmax1), .y(err_lin));

  logic [31:0] sq2, err_lin2, dmax_sq2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  end
  always_ff @(posedge clk) begin
    sq2      <= sq;
    err_lin2 <= err_lin;
    dmax_sq2 <= dmax_sq1;
  end

  // stage 3
  logic [31:0] err_sum;
  fp32_addsub u_add (.a(err_lin2), .b(dmax_sq2), .sub(1'b0), .y(err_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v2;
  end
  always_ff @(posedge clk) begin
    sq_diff <= sq2;
    error   <= err_sum;
  end
endmodule
