// tb_sqdiff_fu: drives the (A-B')^2 FU with directed and random operands,
// one per cycle, and compares (A-B')^2 and max(eps_sd) with a real-arithmetic
// reference rounded to binary32 after each operation. Checks the 3-cycle
// latency and that, for B' obtained by rounding a binary32 B, the true
// (A-B)^2 lies within (A-B')^2 +/- max(eps_sd) (up to binary32 rounding of the
// FU's own arithmetic).
module tb_sqdiff_fu;
  import tb_fp_ref_pkg::*;
  logic        clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [31:0] a, sq_diff, error;
  logic [15:0] bh;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  sqdiff_fu dut (.clk, .rst_n, .in_valid, .a, .b_h(bh), .out_valid, .sq_diff, .error);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results queue: {issue cycle, sq, err, true (A-B)^2 as real bits}
  logic [63:0] exp_q[$];
  int          cyc_q[$];
  real         true_q[$];
  int          bound_viol = 0;
  logic [31:0] av, bv;

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [63:0] e;
    int c0;
    real t, lo, hi;
    if (exp_q.size() == 0) begin
      failures++;
      $display("unexpected out_valid");
    end else begin
      e  = exp_q.pop_front();
      c0 = cyc_q.pop_front();
      t  = true_q.pop_front();
      checks += 3;
      if (sq_diff !== e[63:32] || error !== e[31:0]) begin
        failures++;
        if (failures < 10) $display("MISMATCH cyc=%0d c0=%0d got %h %h exp %h %h", cyc, c0, sq_diff, error, e[63:32], e[31:0]);
      end
      if (cyc - c0 != 3) begin
        failures++;
        $display("latency %0d, expected 3", cyc - c0);
      end
      // error bound (allow 2^-20 relative slack for binary32 rounding of the FU)
      lo = dec_f32(sq_diff) - dec_f32(error);
      hi = dec_f32(sq_diff) + dec_f32(error);
      if (t < lo - hi * pow2(-20) || t > hi + hi * pow2(-20)) begin
        failures++;
        bound_viol++;
        if (bound_viol < 5) $display("bound violated: t=%g sq=%g err=%g", t, dec_f32(sq_diff), dec_f32(error));
      end
    end
  end

  task automatic issue(input logic [31:0] av, input logic [31:0] bf);
    logic [15:0] b16;
    real t;
    b16 = to_f16(dec_f32(bf));
    t   = (dec_f32(av) - dec_f32(bf)) * (dec_f32(av) - dec_f32(bf));
    @(negedge clk);
    a        = av;
    bh       = b16;
    in_valid = 1'b1;
    exp_q.push_back(sqdiff_ref(av, b16));
    cyc_q.push_back(cyc);
    true_q.push_back(t);
  endtask

  initial begin
    a = '0; bh = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    issue(32'h4148_0000, 32'h4120_0000);   // 12.5 vs 10
    issue(32'h4120_0000, 32'h4148_0000);
    issue(32'h3f80_0000, 32'h3f80_0000);   // zero difference
    issue(32'hc2c8_0000, 32'h42c8_0000);   // -100 vs 100
    issue(32'h3a00_0000, 32'h3380_0000);   // B' half subnormal
    issue(32'h4146_6666, 32'h4103_3333);   // 12.4 vs 8.2
    // random back-to-back: lidar-range coordinates (|v| < 128)
    for (int i = 0; i < 4000; i++) begin
      av = rand_f32(110, 133);
      if ($urandom_range(0, 1) == 1) bv = enc_f32(r32(dec_f32(av) + dec_f32(rand_f32(100, 128))));
      else                           bv = rand_f32(110, 133);
      issue(av, bv);
    end
    // idle gaps
    for (int i = 0; i < 50; i++) begin
      issue(rand_f32(120, 133), rand_f32(120, 133));
      @(negedge clk) in_valid = 1'b0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
