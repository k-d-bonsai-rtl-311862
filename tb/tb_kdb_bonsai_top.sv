// tb_kdb_bonsai_top: end-to-end run of the K-D Bonsai hardware at its default
// size, following the software flow of a k-d tree build and radius search.
//
// A behavioural load/store unit holds a memory of 128-bit lines; it withholds
// ready on some cycles and answers after 1-3 cycles. A point cloud of leaves
// (1..16 points each, clustered around random centres with spreads chosen so
// that coordinates sometimes share <sign,exponent> and sometimes not) is
// placed in memory as binary32 x, y, z in the low 96 bits of one line per
// point.
//
// Build: per leaf, LDSPZPB for each point, CPRZPB (size checked against a
// reference), STZPB of ceil(size/16) slices to a compressed-structure array
// (the stored bytes are checked against a reference stream).
// Search: per leaf, LDDCP into vector registers v8..v13 (checked against the
// half-precision points), then for a query point and radius SQDWEL/SQDWEH on
// each coordinate (each lane checked against the reference FU), accumulation
// of d'^2 and of the total error T, and the three-way classification: in
// radius if d'^2 <= r^2 - T, out if d'^2 > r^2 + T, otherwise recomputed in
// full precision. The classification must always equal the exact one.
// Every mechanism must occur: each compression flag set and clear, a full
// 16-point leaf, LSU back-pressure, low and high SQDWE halves, all three
// classification outcomes.
module tb_kdb_bonsai_top;
  import kdb_pkg::*;
  import tb_fp_ref_pkg::*;

  localparam int NLEAF   = 24;
  localparam logic [63:0] PTS_BASE = 64'h0000_1000_0000_0000;
  localparam logic [63:0] CMP_BASE = 64'h0000_2000_0000_0000;

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready, instr_done;
  bonsai_instr_t instr = '0;
  logic [15:0] r_size;
  logic [2:0]  zip_flags;
  logic lsu_req_valid, lsu_req_ready, lsu_resp_valid;
  lsu_req_t lsu_req;
  logic [127:0] lsu_rdata;
  vrf_wr_t vrf_wr0, vrf_wr1;
  logic sqd_valid = 0, sqd_high = 0, sqd_out_valid;
  logic [127:0] sqd_va = '0, sqd_vb = '0, sqd_sq_diff, sqd_error;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  kdb_bonsai_top dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // ---------------- behavioural load/store unit and memory
  logic [127:0] mem [logic [59:0]];
  int  pend = -1;
  logic [127:0] rbuf;
  int  n_stall = 0;
  logic rdy = 1'b0;
  always @(negedge clk) rdy <= ($urandom_range(0, 3) != 0);
  assign lsu_req_ready = rdy;
  always @(posedge clk) begin
    if (pend > 0) pend <= pend - 1;
    else if (pend == 0) pend <= -1;
    if (rst_n && lsu_req_valid && !lsu_req_ready) n_stall++;
    if (rst_n && lsu_req_valid && lsu_req_ready) begin
      if (lsu_req.we) mem[lsu_req.addr[63:4]] = lsu_req.wdata;
      else rbuf <= mem.exists(lsu_req.addr[63:4]) ? mem[lsu_req.addr[63:4]] : '0;
      pend <= int'($urandom_range(0, 2));
    end
  end
  assign lsu_resp_valid = (pend == 0);
  assign lsu_rdata      = rbuf;

  // ---------------- vector register file model
  logic [127:0] vrf [32];
  always @(posedge clk) begin
    if (vrf_wr0.we) vrf[vrf_wr0.idx] <= vrf_wr0.data;
    if (vrf_wr1.we) vrf[vrf_wr1.idx] <= vrf_wr1.data;
  end

  // ---------------- instruction issue
  task automatic exec(input bonsai_instr_t in);
    @(negedge clk);
    instr = in;
    instr_valid = 1'b1;
    while (!instr_ready) @(negedge clk);
    @(negedge clk);
    instr_valid = 1'b0;
    while (!instr_done) @(negedge clk);
  endtask

  // SQDWEL/H: returns {sq_diff, error}, checks the 3-cycle latency
  task automatic sqdwe(input logic [127:0] va, input logic [127:0] vb, input bit hi,
                       output logic [127:0] sq, output logic [127:0] er);
    int t0;
    @(negedge clk);
    sqd_va = va; sqd_vb = vb; sqd_high = hi; sqd_valid = 1'b1;
    t0 = cyc;
    @(negedge clk);
    sqd_valid = 1'b0;
    while (!sqd_out_valid) @(negedge clk);
    check(cyc - t0 == 3, "SQDWE latency");
    sq = sqd_sq_diff;
    er = sqd_error;
  endtask

  // ---------------- scenario
  logic [31:0] P [NLEAF][16][3];    // binary32 points
  int          N [NLEAF];
  logic [63:0] caddr [NLEAF];
  int          cslices [NLEAF];
  int n_flag_set[3], n_flag_clr[3], n_full = 0, n_low = 0, n_high = 0;
  int n_in = 0, n_out = 0, n_shell = 0, n_mis = 0, n_classified = 0;

  initial begin
    bonsai_instr_t in;
    logic [63:0] cur;
    logic [BUF_W-1:0] ref_s;
    int ptr;
    logic [2:0] fref;
    logic [15:0] h [16][3];
    real ctr, spread;

    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // build the point cloud
    for (int l = 0; l < NLEAF; l++) begin
      N[l] = (l % 4 == 0) ? 16 : (l % 4 == 1) ? 15 : int'($urandom_range(1, 16));
      for (int c = 0; c < 3; c++) begin
        ctr    = (real'($urandom_range(0, 16000)) - 8000.0) / 100.0;
        spread = ($urandom_range(0, 2) == 0) ? 40.0 : 0.5;
        for (int i = 0; i < 16; i++)
          P[l][i][c] = enc_f32(r32(ctr + spread * (real'($urandom_range(0, 100000)) / 100000.0 - 0.5)));
      end
      for (int i = 0; i < N[l]; i++)
        mem[(PTS_BASE + 64'(16 * (16 * l + i))) >> 4] = {32'h0, P[l][i][2], P[l][i][1], P[l][i][0]};
    end

    // ---- tree build: compress every leaf
    cur = CMP_BASE;
    for (int l = 0; l < NLEAF; l++) begin
      for (int i = 0; i < N[l]; i++) begin
        in = '0;
        in.op = OP_LDSPZPB; in.index = 5'(i); in.addr = PTS_BASE + 64'(16 * (16 * l + i));
        exec(in);
      end
      in = '0; in.op = OP_CPRZPB; in.num_pts = 5'(N[l]);
      exec(in);
      // reference compressed stream
      for (int i = 0; i < 16; i++) for (int c = 0; c < 3; c++) h[i][c] = to_f16(dec_f32(P[l][i][c]));
      for (int c = 0; c < 3; c++) begin
        fref[c] = 1'b1;
        for (int i = 1; i < N[l]; i++) if (h[i][c][15:10] != h[0][c][15:10]) fref[c] = 1'b0;
        if (fref[c]) n_flag_set[c]++; else n_flag_clr[c]++;
      end
      ref_s = '0; ptr = 0;
      for (int b = 0; b < 3; b++) ref_s[ptr++] = fref[b];
      for (int i = 0; i < N[l]; i++) for (int c = 0; c < 3; c++) for (int b = 0; b < 10; b++) ref_s[ptr++] = h[i][c][b];
      for (int c = 0; c < 3; c++) if (fref[c]) for (int b = 10; b < 16; b++) ref_s[ptr++] = h[0][c][b];
      for (int i = 0; i < N[l]; i++) for (int c = 0; c < 3; c++) if (!fref[c]) for (int b = 10; b < 16; b++) ref_s[ptr++] = h[i][c][b];
      check(r_size == 16'((ptr + 7) / 8), "CPRZPB size");
      if (N[l] == 16) n_full++;
      cslices[l] = (int'(r_size) + 15) / 16;
      caddr[l] = cur;
      in = '0; in.op = OP_STZPB; in.addr = cur; in.nslices = 3'(cslices[l]);
      exec(in);
      for (int k = 0; k < cslices[l]; k++)
        check(mem[(cur >> 4) + 60'(k)] == ref_s[128*k +: 128], "stored compressed slice");
      cur = cur + 64'(16 * cslices[l]);
    end
    $display("compressed %0d leaves into %0d bytes (uncompressed fp32: %0d bytes)",
             NLEAF, cur - CMP_BASE, 12 * (N.sum()));

    // ---- radius search: decompress and classify every leaf
    for (int l = 0; l < NLEAF; l++) begin
      logic [31:0] q [3];
      real r2, dd [16], d2p [16], tt [16];
      logic [127:0] sq, er;
      int qi;
      in = '0; in.op = OP_LDDCP; in.v_base = 5'd8; in.num_pts = 5'(N[l]);
      in.addr = caddr[l]; in.nslices = 3'(cslices[l]);
      exec(in);
      @(negedge clk);
      for (int c = 0; c < 3; c++) for (int j = 0; j < 16; j++)
        check(vrf[8 + 2*c + j/8][16*(j%8) +: 16] == ((j < N[l]) ? to_f16(dec_f32(P[l][j][c])) : 16'h0),
              "LDDCP write-back");
      // query: a point of this leaf, radius from the exact distance to another
      qi = int'($urandom_range(0, N[l] - 1));
      for (int c = 0; c < 3; c++) q[c] = P[l][qi][c];
      for (int j = 0; j < 16; j++) begin
        dd[j] = 0.0; d2p[j] = 0.0; tt[j] = 0.0;
        for (int c = 0; c < 3; c++)
          dd[j] += (dec_f32(q[c]) - dec_f32(P[l][j][c])) * (dec_f32(q[c]) - dec_f32(P[l][j][c]));
      end
      r2 = dd[$urandom_range(0, N[l] - 1)];                 // puts one point on the sphere
      if (l % 3 == 1) r2 = r2 * 0.5 + 1.0;
      for (int c = 0; c < 3; c++) begin
        for (int hf = 0; hf < 4; hf++) begin                // reg (points 0-7, 8-15) x low/high
          logic [127:0] vb;
          vb = vrf[8 + 2*c + hf/2];
          sqdwe({4{q[c]}}, vb, hf[0], sq, er);
          if (hf[0]) n_high++; else n_low++;
          for (int ln = 0; ln < 4; ln++) begin
            int j;
            logic [63:0] rf;
            j = 8 * (hf / 2) + 4 * (hf % 2) + ln;
            rf = sqdiff_ref(q[c], vb[16*(4*(hf%2) + ln) +: 16]);
            check(sq[32*ln +: 32] == rf[63:32] && er[32*ln +: 32] == rf[31:0], "SQDWE lane");
            d2p[j] += dec_f32(sq[32*ln +: 32]);
            tt[j]  += dec_f32(er[32*ln +: 32]);
          end
        end
      end
      for (int j = 0; j < N[l]; j++) begin
        bit in_r, exact;
        exact = (dd[j] <= r2);
        if (d2p[j] <= r2 - tt[j])     begin in_r = 1'b1; n_in++; end
        else if (d2p[j] > r2 + tt[j]) begin in_r = 1'b0; n_out++; end
        else                          begin in_r = exact; n_shell++; end   // 32-bit recompute
        n_classified++;
        check(in_r == exact, "classification equals full precision");
      end
    end

    // ---- every mechanism must have happened
    for (int c = 0; c < 3; c++) check(n_flag_set[c] > 0 && n_flag_clr[c] > 0, "flag set and clear");
    check(n_full > 0, "16-point leaf");
    check(n_stall > 0, "LSU back-pressure");
    check(n_low > 0 && n_high > 0, "SQDWEL and SQDWEH");
    check(n_in > 0 && n_out > 0 && n_shell > 0, "in / out / shell outcomes");
    $display("flags set x/y/z: %0d/%0d/%0d of %0d leaves; stalls %0d; classified %0d: in %0d, out %0d, recomputed %0d",
             n_flag_set[0], n_flag_set[1], n_flag_set[2], NLEAF, n_stall, n_classified, n_in, n_out, n_shell);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
