// tb_zippts_buffer: checks the ZipPts buffer against a shadow copy kept in
// the testbench: reset to zero, point writes (LDSPZPB path), slice writes
// (slice loads), whole-image writes (compress/decompress), LSU slice reads and
// the two register-file read ports returning one coordinate of points 0-7
// and 8-15. Random command sequences; every read port is compared each cycle.
module tb_zippts_buffer;
  import kdb_pkg::*;
  logic clk = 0, rst_n = 1;
  buf_cmd_e            cmd = BUF_NOP;
  logic [3:0]          pt_idx = '0;
  logic [PT_W-1:0]     pt_data = '0;
  logic [SLC_W-1:0]    slice_idx = '0;
  logic [SLICE_W-1:0]  slice_data = '0;
  logic [BUF_W-1:0]    all_data = '0, image;
  logic [1:0]          wb_coord = '0;
  logic [SLICE_W-1:0]  lsu_rdata, vrf_rdata0, vrf_rdata1;
  logic [BUF_W-1:0]    shadow;
  int checks = 0, failures = 0;
  int n_cmd[4];
  always #5 clk = ~clk;

  zippts_buffer dut (.clk, .rst_n, .cmd, .pt_idx, .pt_data, .slice_idx, .slice_data,
                     .all_data, .wb_coord, .image, .lsu_rdata, .vrf_rdata0, .vrf_rdata1);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic check_reads();
    logic [127:0] e0, e1;
    check(image == shadow, "image");
    check(lsu_rdata == ((slice_idx < 7) ? shadow[128*slice_idx +: 128] : '0), "lsu slice read");
    for (int j = 0; j < 8; j++) begin
      e0[16*j +: 16] = shadow[48*j + 16*wb_coord +: 16];
      e1[16*j +: 16] = shadow[48*(j + 8) + 16*wb_coord +: 16];
    end
    check(vrf_rdata0 == e0 && vrf_rdata1 == e1, "vrf ports");
  endtask

  initial begin
    shadow = '0;
    #1 rst_n = 1'b0;
    #2 rst_n = 1'b1;
    @(negedge clk);
    check_reads();
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      cmd        = buf_cmd_e'($urandom_range(0, 3));
      pt_idx     = 4'($urandom);
      pt_data    = {16'($urandom), 32'($urandom)};
      slice_idx  = 3'($urandom_range(0, 6));
      slice_data = {$urandom, $urandom, $urandom, $urandom};
      for (int w = 0; w < BUF_W / 32; w++) all_data[32*w +: 32] = $urandom;
      wb_coord   = 2'($urandom_range(0, 2));
      #1 check_reads();
      n_cmd[cmd]++;
      @(posedge clk);
      case (cmd)
        BUF_POINT: shadow[48*pt_idx +: 48] = pt_data;
        BUF_SLICE: shadow[128*slice_idx +: 128] = slice_data;
        BUF_ALL:   shadow = all_data;
        default: ;
      endcase
    end
    @(negedge clk) cmd = BUF_NOP;
    #1 check_reads();
    for (int k = 1; k < 4; k++) check(n_cmd[k] > 0, "command kind exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
