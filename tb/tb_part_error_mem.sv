// tb_part_error_mem: reads all 32 lines of the part error table and compares
// them with 2*max(dB) = 2^(e-25) and max(dB)^2 = 2^(2e-52), e = max(exp,1),
// computed in real arithmetic and encoded to binary32.
module tb_part_error_mem;
  import tb_fp_ref_pkg::*;
  logic [4:0]  e;
  logic [31:0] two_dmax, dmax_sq;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  part_error_mem dut (.exp_in(e), .two_dmax(two_dmax), .dmax_sq(dmax_sq));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      automatic int ee = (i == 0) ? 1 : i;
      automatic real dmax = pow2(ee - 15) * pow2(-11);   // Eq. (6)
      e = 5'(i);
      #1;
      checks += 2;
      if (two_dmax !== enc_f32(2.0 * dmax)) begin
        failures++;
        $display("line %0d: 2dmax got %h exp %h", i, two_dmax, enc_f32(2.0 * dmax));
      end
      if (dmax_sq !== enc_f32(dmax * dmax)) begin
        failures++;
        $display("line %0d: dmax^2 got %h exp %h", i, dmax_sq, enc_f32(dmax * dmax));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
