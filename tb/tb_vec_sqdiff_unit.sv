// tb_vec_sqdiff_unit: SQDWEL/SQDWEH on the four-lane unit. A query
// coordinate is broadcast to all four lanes of vA, eight half-precision leaf
// coordinates fill vB'; each instruction's four lanes are compared with the
// reference FU model for lanes 0-3 (low) or 4-7 (high). Results must arrive
// 3 cycles after issue; instructions are issued back to back and with gaps.
module tb_vec_sqdiff_unit;
  import tb_fp_ref_pkg::*;
  logic         clk = 0, rst_n = 0, in_valid = 0, high = 0, out_valid;
  logic [127:0] va = '0, vb = '0, v_sq_diff, v_error;
  int checks = 0, failures = 0, cyc = 0, n_low = 0, n_high = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  vec_sqdiff_unit dut (.clk, .rst_n, .in_valid, .high, .va, .vb, .out_valid, .v_sq_diff, .v_error);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [255:0] exp_q[$];
  int           cyc_q[$];

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [255:0] e;
    int c0;
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("unexpected result");
    end else begin
      e  = exp_q.pop_front();
      c0 = cyc_q.pop_front();
      checks++;
      if (v_sq_diff !== e[255:128] || v_error !== e[127:0]) begin
        failures++;
        if (failures < 10) $display("MISMATCH got %h %h\n exp %h %h", v_sq_diff, v_error, e[255:128], e[127:0]);
      end
      if (cyc - c0 != 3) begin
        failures++;
        $display("latency %0d", cyc - c0);
      end
    end
  end

  task automatic issue(input logic [31:0] q, input bit hi);
    logic [255:0] e;
    logic [63:0]  r;
    @(negedge clk);
    for (int j = 0; j < 8; j++) vb[16*j +: 16] = to_f16(dec_f32(q) + dec_f32(rand_f32(110, 130)));
    va = {4{q}};
    high = hi;
    in_valid = 1'b1;
    for (int l = 0; l < 4; l++) begin
      r = sqdiff_ref(q, vb[16*(l + (hi ? 4 : 0)) +: 16]);
      e[128 + 32*l +: 32] = r[63:32];
      e[32*l +: 32]       = r[31:0];
    end
    exp_q.push_back(e);
    cyc_q.push_back(cyc);
    if (hi) n_high++; else n_low++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      issue(rand_f32(115, 133), 1'b0);
      issue(rand_f32(115, 133), 1'b1);
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk) in_valid = 1'b0;
        repeat ($urandom_range(0, 2)) @(posedge clk);
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_low == 0 || n_high == 0) begin
      failures++;
      $display("missing results %0d", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
