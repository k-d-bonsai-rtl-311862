// tb_workload_radius_search: euclidean-clustering style radius search on a
// synthetic LiDAR frame, run through the K-D Bonsai hardware at default size.
//
// The frame: NOBJ objects (surfaces of a few metres) scattered 4-100 m around
// the sensor plus ground points, NPTS points in all, binary32 coordinates.
// The testbench builds a k-d tree the usual way (split on the coordinate with
// the largest spread, at the median, until a node holds at most 15 points, the
// common library default) and keeps each leaf's bounding box.
// Build phase: every leaf is compressed by the hardware (LDSPZPB, CPRZPB,
// STZPB). Search phase: NQ queries, each a point of the frame, radius R. Every
// leaf whose bounding box lies within R of the query is decompressed (LDDCP)
// and classified with SQDWEL/SQDWEH and the error shell; points in the shell
// are recomputed exactly. Each query's result set must equal a brute-force
// exact search over the whole frame. Reported: bytes of compressed leaves
// against binary32 leaves, and the fraction of classifications recomputed.
module tb_workload_radius_search;
  import kdb_pkg::*;
  import tb_fp_ref_pkg::*;

  localparam int NPTS = 480;
  localparam int NOBJ = 10;
  localparam int NQ   = 40;
  localparam real R   = 0.5;            // metres
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
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  kdb_bonsai_top dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  // ---------------- memory behind a one-cycle load/store unit
  logic [127:0] mem [logic [59:0]];
  logic [127:0] rbuf;
  logic         resp = 1'b0;
  assign lsu_req_ready  = 1'b1;
  assign lsu_resp_valid = resp;
  assign lsu_rdata      = rbuf;
  always @(posedge clk) begin
    resp <= rst_n && lsu_req_valid;
    if (rst_n && lsu_req_valid) begin
      if (lsu_req.we) mem[lsu_req.addr[63:4]] = lsu_req.wdata;
      else rbuf <= mem.exists(lsu_req.addr[63:4]) ? mem[lsu_req.addr[63:4]] : '0;
    end
  end

  logic [127:0] vrf [32];
  always @(posedge clk) begin
    if (vrf_wr0.we) vrf[vrf_wr0.idx] <= vrf_wr0.data;
    if (vrf_wr1.we) vrf[vrf_wr1.idx] <= vrf_wr1.data;
  end

  task automatic exec(input bonsai_instr_t in);
    @(negedge clk);
    instr = in;
    instr_valid = 1'b1;
    while (!instr_ready) @(negedge clk);
    @(negedge clk);
    instr_valid = 1'b0;
    while (!instr_done) @(negedge clk);
  endtask

  task automatic sqdwe(input logic [127:0] va, input logic [127:0] vb, input bit hi,
                       output logic [127:0] sq, output logic [127:0] er);
    @(negedge clk);
    sqd_va = va; sqd_vb = vb; sqd_high = hi; sqd_valid = 1'b1;
    @(negedge clk);
    sqd_valid = 1'b0;
    while (!sqd_out_valid) @(negedge clk);
    sq = sqd_sq_diff;
    er = sqd_error;
  endtask

  // ---------------- frame and k-d tree
  logic [31:0] P [NPTS][3];
  real         PV [NPTS][3];
  int          idx [NPTS];
  int          lf_start [$], lf_len [$];
  real         lf_lo [$][3], lf_hi [$][3];
  logic [63:0] lf_addr [$];
  int          lf_slices [$];

  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  initial begin
    int np;
    int st_s [$], st_e [$];
    longint bytes_cmp = 0, bytes_raw = 0;
    int n_class = 0, n_shell = 0, n_found = 0, n_leaf_visits = 0;
    bonsai_instr_t in;
    logic [63:0] cur;

    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---- synthetic frame
    np = 0;
    for (int o = 0; o < NOBJ; o++) begin
      real cx, cy, cz, w;
      cx = urand(4.0, 100.0) * (($urandom_range(0, 1) == 1) ? 1.0 : -1.0);
      cy = urand(-40.0, 40.0);
      cz = urand(-1.5, 1.0);
      w  = urand(0.5, 4.0);
      for (int i = 0; i < (NPTS * 3 / 4) / NOBJ; i++) begin
        PV[np][0] = cx + urand(-w, w);
        PV[np][1] = cy + urand(-w / 2.0, w / 2.0);
        PV[np][2] = cz + urand(0.0, 1.5);
        np++;
      end
    end
    while (np < NPTS) begin                       // ground
      PV[np][0] = urand(-60.0, 60.0);
      PV[np][1] = urand(-30.0, 30.0);
      PV[np][2] = urand(-1.9, -1.7);
      np++;
    end
    for (int i = 0; i < NPTS; i++) begin
      for (int c = 0; c < 3; c++) begin
        P[i][c]  = enc_f32(r32(PV[i][c]));
        PV[i][c] = dec_f32(P[i][c]);
      end
      idx[i] = i;
    end

    // ---- k-d tree: split on the widest coordinate at the median
    st_s.push_back(0); st_e.push_back(NPTS);
    while (st_s.size() > 0) begin
      int s, e, cbest, m;
      real lo [3], hi [3], best;
      s = st_s.pop_back(); e = st_e.pop_back();
      for (int c = 0; c < 3; c++) begin
        lo[c] = 1.0e9; hi[c] = -1.0e9;
        for (int i = s; i < e; i++) begin
          if (PV[idx[i]][c] < lo[c]) lo[c] = PV[idx[i]][c];
          if (PV[idx[i]][c] > hi[c]) hi[c] = PV[idx[i]][c];
        end
      end
      if (e - s <= 15) begin
        lf_start.push_back(s); lf_len.push_back(e - s);
        lf_lo.push_back(lo); lf_hi.push_back(hi);
        continue;
      end
      cbest = 0; best = -1.0;
      for (int c = 0; c < 3; c++) if (hi[c] - lo[c] > best) begin best = hi[c] - lo[c]; cbest = c; end
      for (int i = s + 1; i < e; i++) begin       // insertion sort on coordinate cbest
        int t, j;
        t = idx[i]; j = i - 1;
        while (j >= s && PV[idx[j]][cbest] > PV[t][cbest]) begin idx[j + 1] = idx[j]; j--; end
        idx[j + 1] = t;
      end
      m = (s + e) / 2;
      st_s.push_back(s); st_e.push_back(m);
      st_s.push_back(m); st_e.push_back(e);
    end

    // ---- build: compress every leaf
    for (int i = 0; i < NPTS; i++)
      mem[(PTS_BASE + 64'(16 * i)) >> 4] = {32'h0, P[i][2], P[i][1], P[i][0]};
    cur = CMP_BASE;
    for (int l = 0; l < lf_start.size(); l++) begin
      for (int i = 0; i < lf_len[l]; i++) begin
        in = '0; in.op = OP_LDSPZPB; in.index = 5'(i);
        in.addr = PTS_BASE + 64'(16 * idx[lf_start[l] + i]);
        exec(in);
      end
      in = '0; in.op = OP_CPRZPB; in.num_pts = 5'(lf_len[l]);
      exec(in);
      lf_slices.push_back((int'(r_size) + 15) / 16);
      lf_addr.push_back(cur);
      bytes_cmp += longint'(r_size);
      bytes_raw += longint'(12 * lf_len[l]);
      in = '0; in.op = OP_STZPB; in.addr = cur; in.nslices = 3'(lf_slices[l]);
      exec(in);
      cur = cur + 64'(16 * lf_slices[l]);
    end

    // ---- search
    for (int qn = 0; qn < NQ; qn++) begin
      int qi;
      bit got [NPTS], want;
      qi = int'($urandom_range(0, NPTS - 1));
      for (int i = 0; i < NPTS; i++) got[i] = 1'b0;
      for (int l = 0; l < lf_start.size(); l++) begin
        real dbox;
        logic [127:0] sq, er;
        real d2p [16], tt [16];
        dbox = 0.0;
        for (int c = 0; c < 3; c++) begin
          if (PV[qi][c] < lf_lo[l][c]) dbox += (lf_lo[l][c] - PV[qi][c]) ** 2;
          if (PV[qi][c] > lf_hi[l][c]) dbox += (PV[qi][c] - lf_hi[l][c]) ** 2;
        end
        if (dbox > R * R) continue;
        n_leaf_visits++;
        in = '0; in.op = OP_LDDCP; in.v_base = 5'd0; in.num_pts = 5'(lf_len[l]);
        in.addr = lf_addr[l]; in.nslices = 3'(lf_slices[l]);
        exec(in);
        @(negedge clk);
        for (int j = 0; j < 16; j++) begin d2p[j] = 0.0; tt[j] = 0.0; end
        for (int c = 0; c < 3; c++)
          for (int hf = 0; hf < ((lf_len[l] > 8) ? 4 : 2); hf++) begin
            sqdwe({4{P[qi][c]}}, vrf[2*c + hf/2], hf[0], sq, er);
            for (int ln = 0; ln < 4; ln++) begin
              d2p[4*hf + ln] += dec_f32(sq[32*ln +: 32]);
              tt[4*hf + ln]  += dec_f32(er[32*ln +: 32]);
            end
          end
        for (int j = 0; j < lf_len[l]; j++) begin
          int p;
          real d2;
          p = idx[lf_start[l] + j];
          n_class++;
          if (d2p[j] <= R * R - tt[j]) got[p] = 1'b1;
          else if (d2p[j] > R * R + tt[j]) got[p] = 1'b0;
          else begin                                    // shell: full precision
            n_shell++;
            d2 = 0.0;
            for (int c = 0; c < 3; c++) d2 += (PV[qi][c] - PV[p][c]) ** 2;
            got[p] = (d2 <= R * R);
          end
        end
      end
      for (int i = 0; i < NPTS; i++) begin
        real d2;
        d2 = 0.0;
        for (int c = 0; c < 3; c++) d2 += (PV[qi][c] - PV[i][c]) ** 2;
        want = (d2 <= R * R);
        if (want) n_found++;
        check(got[i] == want, "radius search result equals exact search");
      end
    end
    check(n_shell < n_class, "shell is the exception");
    $display("%0d points, %0d leaves; compressed leaves %0d bytes vs %0d bytes binary32 (%0d%%)",
             NPTS, lf_start.size(), bytes_cmp, bytes_raw, 100 * bytes_cmp / bytes_raw);
    $display("%0d queries, %0d leaf visits, %0d neighbours, %0d classifications, %0d recomputed in full precision",
             NQ, n_leaf_visits, n_found, n_class, n_shell);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
