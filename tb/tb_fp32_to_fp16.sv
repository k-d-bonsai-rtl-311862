// tb_fp32_to_fp16: checks the single-to-half conversion against a
// real-arithmetic reference (round to nearest, ties to even) on directed
// corner cases (ties, overflow boundary, subnormals, zero, inf, NaN) and on
// random values whose exponents span the half-precision range and beyond.
module tb_fp32_to_fp16;
  import tb_fp_ref_pkg::*;
  logic [31:0] f;
  logic [15:0] h;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp32_to_fp16 dut (.f_in(f), .h_out(h));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_val(input logic [31:0] v);
    logic [15:0] exp_h;
    f = v;
    #1;
    if (v[30:23] == 8'hff) exp_h = (v[22:0] != 0) ? {v[31], 5'h1f, 1'b1, v[21:13]} : {v[31], 5'h1f, 10'd0};
    else begin exp_h = to_f16(dec_f32(v)); exp_h[15] = v[31]; end
    checks++;
    if (h !== exp_h) begin
      failures++;
      if (failures < 10) $display("MISMATCH in=%h got=%h exp=%h", v, h, exp_h);
    end
  endtask

  initial begin
    // directed
    check_val(32'h3f80_0000);  // 1.0
    check_val(32'hbf80_0000);  // -1.0
    check_val(32'h3f80_1000);  // 1 + 2^-11: tie, even -> 1.0
    check_val(32'h3f80_3000);  // 1 + 3*2^-11: tie, odd -> up
    check_val(32'h3f80_1001);  // just above tie -> up
    check_val(32'h477f_e000);  // 65504, max half
    check_val(32'h477f_efff);  // just below 65520 -> 65504
    check_val(32'h477f_f000);  // 65520 -> inf
    check_val(32'h4780_0000);  // 65536 -> inf
    check_val(32'h3880_0000);  // 2^-14 min normal
    check_val(32'h3380_0000);  // 2^-24 min subnormal
    check_val(32'h3300_0000);  // 2^-25: tie to 0
    check_val(32'h3300_0001);  // just above 2^-25 -> 2^-24
    check_val(32'h387f_f000);  // rounds up into the min normal
    check_val(32'h0000_0000);
    check_val(32'h8000_0000);
    check_val(32'h0000_0001);  // binary32 subnormal
    check_val(32'h7f80_0000);  // inf
    check_val(32'hff80_0000);
    check_val(32'h7fc0_0000);  // NaN
    check_val(32'h42f6_6666);  // 123.2, a point at lidar range
    // random: exponents from deep subnormal to overflow
    for (int i = 0; i < 20000; i++) check_val(rand_f32(95, 150));
    // exact ties between two half-precision neighbours (13 dropped bits = 1000..0)
    for (int i = 0; i < 2000; i++) begin
      automatic logic [31:0] v = rand_f32(113, 142);
      v[12:0] = 13'h1000;
      check_val(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
