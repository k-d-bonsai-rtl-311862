// tb_bonsai_sequencer: checks the micro-operation sequences of LDSPZPB,
// CPRZPB, STZPB and LDDCP. The buffer read ports return patterns that name
// the slice or coordinate read, so stores and write-backs can be traced. A
// load/store-unit model accepts requests (ready randomly withheld in the
// first phase) and answers each after a latency. For every instruction the
// monitor checks the request addresses (consecutive 16-byte slices), store
// data, the buffer commands and indices, the codec mode and point count, the
// register-file write indices v_base+2c / v_base+2c+1 and data, r_size and
// the micro-operation counts. In the second phase (ready always high, fixed
// latency L) the instruction latencies are checked against
// LDSPZPB 2+L, CPRZPB 2, STZPB n(1+L)+1, LDDCP n(1+L)+5 cycles.
module tb_bonsai_sequencer;
  import kdb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready, done;
  bonsai_instr_t instr = '0;
  logic [15:0] r_size;
  logic lsu_req_valid, lsu_req_ready, lsu_resp_valid;
  lsu_req_t lsu_req;
  buf_cmd_e buf_cmd;
  logic [3:0] buf_pt_idx;
  logic [SLC_W-1:0] buf_slice_idx;
  logic [1:0] buf_wb_coord;
  logic [127:0] buf_lsu_rdata, buf_vrf_rdata0, buf_vrf_rdata1;
  logic [NPTS_W-1:0] codec_num_pts;
  logic codec_decompress;
  logic [15:0] codec_size = 16'd0;
  vrf_wr_t vrf_wr0, vrf_wr1;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  bonsai_sequencer dut (.*);

  assign buf_lsu_rdata  = {4{29'h1500_0000, buf_slice_idx}};
  assign buf_vrf_rdata0 = {8{14'h2b00, buf_wb_coord}};
  assign buf_vrf_rdata1 = {8{14'h3c00, buf_wb_coord}};

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // ---------------- LSU model
  bit   rand_ready = 1;
  int   lat = 2;
  int   pend = -1;                  // cycles until the response, -1: none
  assign lsu_req_ready = rand_ready ? ((cyc % 3) != 1) : 1'b1;
  always @(posedge clk) begin
    if (pend > 0) pend <= pend - 1;
    if (lsu_req_valid && lsu_req_ready) pend <= lat - 1;
    else if (pend == 0) pend <= -1;
  end
  assign lsu_resp_valid = (pend == 0);

  // ---------------- monitor
  bonsai_instr_t cur;
  int n_req, n_pt, n_slice, n_all, n_wb;
  always @(posedge clk) if (rst_n) begin
    if (lsu_req_valid && lsu_req_ready) begin
      check(lsu_req.we == (cur.op == OP_STZPB), "request direction");
      check(lsu_req.addr == cur.addr + 64'(16 * n_req), "request address");
      if (lsu_req.we) check(lsu_req.wdata == {4{29'h1500_0000, 3'(n_req)}}, "store data is slice k");
      n_req++;
    end
    case (buf_cmd)
      BUF_POINT: begin
        check(cur.op == OP_LDSPZPB && buf_pt_idx == cur.index[3:0], "point write");
        n_pt++;
      end
      BUF_SLICE: begin
        check(cur.op == OP_LDDCP && buf_slice_idx == 3'(n_slice), "slice write");
        n_slice++;
      end
      BUF_ALL: begin
        check(codec_decompress == (cur.op == OP_LDDCP) && codec_num_pts == cur.num_pts, "codec control");
        n_all++;
      end
      default: ;
    endcase
    if (vrf_wr0.we || vrf_wr1.we) begin
      check(vrf_wr0.we && vrf_wr1.we && cur.op == OP_LDDCP, "write-back pair");
      check(vrf_wr0.idx == cur.v_base + 5'(2 * n_wb) && vrf_wr1.idx == cur.v_base + 5'(2 * n_wb + 1), "write-back index");
      check(vrf_wr0.data == {8{14'h2b00, 2'(n_wb)}} && vrf_wr1.data == {8{14'h3c00, 2'(n_wb)}}, "write-back data");
      n_wb++;
    end
  end

  task automatic run(input bonsai_instr_t in, input bit timed);
    int t0, exp_cyc;
    @(negedge clk);
    cur = in;
    n_req = 0; n_pt = 0; n_slice = 0; n_all = 0; n_wb = 0;
    codec_size = 16'($urandom_range(1, 97));
    instr = in;
    instr_valid = 1'b1;
    while (!instr_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    instr_valid = 1'b0;
    while (!done) @(negedge clk);
    case (in.op)
      OP_LDSPZPB: begin
        check(n_req == 1 && n_pt == 1 && n_all == 0 && n_wb == 0, "LDSPZPB micro-ops");
        exp_cyc = 2 + lat;
      end
      OP_CPRZPB: begin
        check(n_req == 0 && n_all == 1 && r_size == codec_size, "CPRZPB micro-ops / size");
        exp_cyc = 2;
      end
      OP_STZPB: begin
        check(n_req == int'(in.nslices) && n_all == 0 && n_wb == 0, "STZPB micro-ops");
        exp_cyc = int'(in.nslices) * (1 + lat) + 1;
      end
      default: begin
        check(n_req == int'(in.nslices) && n_slice == int'(in.nslices) && n_all == 1 && n_wb == 3
              && r_size == codec_size, "LDDCP micro-ops");
        exp_cyc = int'(in.nslices) * (1 + lat) + 5;
      end
    endcase
    if (timed) check(cyc - t0 == exp_cyc, "instruction latency");
  endtask

  initial begin
    bonsai_instr_t in;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int phase = 0; phase < 2; phase++) begin
      rand_ready = (phase == 0);
      for (int i = 0; i < 400; i++) begin
        lat = (phase == 0) ? int'($urandom_range(1, 4)) : 3;
        in = '0;
        in.op      = bonsai_op_e'($urandom_range(0, 3));
        in.addr    = {32'($urandom), 28'($urandom), 4'h0};
        in.index   = 5'($urandom_range(0, 15));
        in.num_pts = 5'($urandom_range(1, 16));
        in.nslices = 3'($urandom_range(1, 7));
        in.v_base  = 5'($urandom_range(0, 26));
        run(in, phase == 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
