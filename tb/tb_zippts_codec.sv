// tb_zippts_codec: checks the Compress/Decompress Logic.
// Random leaves of 0..16 points are generated around a random centre, with a
// per-coordinate spread that is sometimes small enough for the coordinate to
// share its <sign,exponent> across the leaf and sometimes not. The expected
// compressed stream is built field by field by appending to a bit vector
// (flags cX cY cZ, mantissas, shared tuples, unshared tuples), independently
// of the RTL's offset arithmetic, and compared bit for bit with the codec's
// output, together with the flags and the size in bytes. The stream is then
// decompressed and must give back the leaf, with all other points zero.
module tb_zippts_codec;
  import kdb_pkg::*;
  import tb_fp_ref_pkg::*;
  logic [BUF_W-1:0]  buf_in, buf_out;
  logic [NPTS_W-1:0] num_pts;
  logic              decompress;
  logic [2:0]        flags;
  logic [15:0]       size_bytes;
  int checks = 0, failures = 0;
  int flag_seen[3];
  int none_seen = 0, all_seen = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  zippts_codec dut (.buf_in, .num_pts, .decompress, .buf_out, .flags, .size_bytes);

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [BUF_W-1:0] ref_s;
  int               ptr;
  task automatic push(input logic [15:0] v, input int w);
    for (int b = 0; b < w; b++) ref_s[ptr + b] = v[b];
    ptr += w;
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (n=%0d)", what, num_pts);
    end
  endtask

  initial begin
    logic [15:0] pts [16][3];
    logic [2:0]  fref;
    logic [BUF_W-1:0] raw;
    int n;
    real ctr, spread;
    decompress = 0;
    for (int t = 0; t < 3000; t++) begin
      n = (t < 17) ? t : int'($urandom_range(0, 16));
      for (int c = 0; c < 3; c++) begin
        ctr    = (real'($urandom_range(0, 20000)) - 10000.0) / 100.0;   // +-100 m
        spread = ($urandom_range(0, 2) == 0) ? 60.0 : (($urandom_range(0, 1) == 0) ? 4.0 : 0.05);
        for (int i = 0; i < 16; i++)
          pts[i][c] = to_f16(ctr + spread * (real'($urandom_range(0, 1000)) / 1000.0 - 0.5));
      end
      raw = '0;
      for (int i = 0; i < 16; i++) for (int c = 0; c < 3; c++) raw[48*i + 16*c +: 16] = pts[i][c];
      // reference flags
      for (int c = 0; c < 3; c++) begin
        fref[c] = (n > 0);
        for (int i = 1; i < n; i++) if (pts[i][c][15:10] != pts[0][c][15:10]) fref[c] = 1'b0;
        if (fref[c]) flag_seen[c]++;
      end
      if (n > 0 && fref == 3'b000) none_seen++;
      if (fref == 3'b111) all_seen++;
      // reference stream
      ref_s = '0;
      ptr = 0;
      push({13'd0, fref}, 3);
      for (int i = 0; i < n; i++) for (int c = 0; c < 3; c++) push({6'd0, pts[i][c][9:0]}, 10);
      for (int c = 0; c < 3; c++) if (fref[c]) push({10'd0, pts[0][c][15:10]}, 6);
      for (int i = 0; i < n; i++) for (int c = 0; c < 3; c++) if (!fref[c]) push({10'd0, pts[i][c][15:10]}, 6);
      // compress
      buf_in = raw;
      num_pts = NPTS_W'(n);
      decompress = 0;
      #1;
      check(flags == fref, "flags");
      check(buf_out == ref_s, "compressed stream");
      check(size_bytes == 16'((ptr + 7) / 8), "size");
      // decompress
      buf_in = ref_s;
      decompress = 1;
      #1;
      for (int i = n; i < 16; i++) for (int c = 0; c < 3; c++) raw[48*i + 16*c +: 16] = '0;
      check(buf_out == raw, "decompressed points");
      check(flags == fref, "decoded flags");
      check(size_bytes == 16'((ptr + 7) / 8), "decoded size");
      @(posedge clk);
    end
    for (int c = 0; c < 3; c++) check(flag_seen[c] > 0, "flag never set");
    check(none_seen > 0 && all_seen > 0, "flag mix");
    $display("leaves with cX/cY/cZ set: %0d/%0d/%0d, none: %0d, all: %0d",
             flag_seen[0], flag_seen[1], flag_seen[2], none_seen, all_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
