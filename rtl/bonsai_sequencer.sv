// bonsai_sequencer: cracks the ZipPts Bonsai-extension instructions into
// micro-operations and drives the ZipPts buffer, the Compress/Decompress
// Logic, the load/store unit and the two vector-register write ports.
//
//   LDSPZPB index, [addr]      1 load of the 96-bit point (x, y, z binary32 in
//                              the low 96 bits of the 128-bit response); the
//                              converted 48-bit point is written at index
//   CPRZPB  num_pts            1 compress micro-op; size in bytes -> r_size
//   STZPB   [addr], nslices    nslices stores of slices 0.. to addr, addr+16, ...
//   LDDCP   v_base, num_pts, [addr], nslices
//                              nslices slice loads, 1 decompress micro-op,
//                              3 write-backs (x, y, z), each writing two vector
//                              registers v_base+2c (points 0-7) and
//                              v_base+2c+1 (points 8-15) through the two ports
//
// The micro-operation sequence of each instruction follows the paper. The
// handshakes are this design's choice: an instruction is taken when
// instr_valid and instr_ready are both high (ready only when idle); done pulses
// for one cycle when its last micro-operation has finished, with r_size valid
// (CPRZPB's size; also the decoded size for LDDCP). The LSU is a
// valid/ready request channel with one response (resp_valid, with load data)
// per request, in order; one request is outstanding at a time. A request
// must stay unchanged while it waits for ready.
//
// Cycle counts (LSU answering in L cycles after acceptance, ready at once):
// LDSPZPB 2+L, CPRZPB 2, STZPB n(1+L)+1, LDDCP n(1+L)+5.
module bonsai_sequencer
  import kdb_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // instruction issue
  input  logic                 instr_valid,
  output logic                 instr_ready,
  input  bonsai_instr_t        instr,
  output logic                 done,
  output logic [15:0]          r_size,
  // load/store unit
  output logic                 lsu_req_valid,
  input  logic                 lsu_req_ready,
  output lsu_req_t             lsu_req,
  input  logic                 lsu_resp_valid,
  // ZipPts buffer control
  output buf_cmd_e             buf_cmd,
  output logic [NPTS_W-2:0]    buf_pt_idx,
  output logic [SLC_W-1:0]     buf_slice_idx,
  output logic [1:0]           buf_wb_coord,
  input  logic [SLICE_W-1:0]   buf_lsu_rdata,
  input  logic [SLICE_W-1:0]   buf_vrf_rdata0,
  input  logic [SLICE_W-1:0]   buf_vrf_rdata1,
  // Compress/Decompress Logic control
  output logic [NPTS_W-1:0]    codec_num_pts,
  output logic                 codec_decompress,
  input  logic [15:0]          codec_size,
  // vector register file write ports
  output vrf_wr_t              vrf_wr0,
  output vrf_wr_t              vrf_wr1
);
  typedef enum logic [2:0] {
    S_IDLE, S_REQ, S_WAIT, S_CPR, S_DCP, S_WB, S_DONE
  } state_e;

  state_e          state, state_nx;
  bonsai_instr_t   cur;
  logic [SLC_W-1:0] k;            // slice counter
  logic [1:0]       c;            // write-back coordinate
  logic [15:0]      size_q;

  assign instr_ready = (state == S_IDLE);
  assign done        = (state == S_DONE);
  assign r_size      = size_q;

  // ---------------- LSU request
  assign lsu_req_valid = (state == S_REQ);
  always_comb begin
    lsu_req.we    = (cur.op == OP_STZPB);
    lsu_req.addr  = cur.addr + ADDR_W'({k, 4'b0000});     // 16 bytes per slice
    lsu_req.wdata = buf_lsu_rdata;
  end

  // ---------------- buffer / codec control
  always_comb begin
    buf_cmd          = BUF_NOP;
    buf_pt_idx       = cur.index[NPTS_W-2:0];
    buf_slice_idx    = k;
    buf_wb_coord     = c;
    codec_num_pts    = cur.num_pts;
    codec_decompress = (cur.op == OP_LDDCP);
    if (state == S_WAIT && lsu_resp_valid) begin
      if (cur.op == OP_LDSPZPB)   buf_cmd = BUF_POINT;
      else if (cur.op == OP_LDDCP) buf_cmd = BUF_SLICE;
    end
    if (state == S_CPR || state == S_DCP) buf_cmd = BUF_ALL;
  end

  // ---------------- vector register write-back
  always_comb begin
    vrf_wr0.we   = (state == S_WB);
    vrf_wr0.idx  = cur.v_base + VREG_W'({c, 1'b0});
    vrf_wr0.data = buf_vrf_rdata0;
    vrf_wr1.we   = (state == S_WB);
    vrf_wr1.idx  = cur.v_base + VREG_W'({c, 1'b1});
    vrf_wr1.data = buf_vrf_rdata1;
  end

  // ---------------- state machine
  always_comb begin
    state_nx = state;
    unique case (state)
      S_IDLE: if (instr_valid) begin
        unique case (instr.op)
          OP_CPRZPB: state_nx = S_CPR;
          OP_LDSPZPB: state_nx = S_REQ;
          default:   state_nx = (instr.nslices == '0) ? (instr.op == OP_LDDCP ? S_DCP : S_DONE)
                                                       : S_REQ;
        endcase
      end
      S_REQ:  if (lsu_req_ready) state_nx = S_WAIT;
      S_WAIT: if (lsu_resp_valid) begin
        if (cur.op == OP_LDSPZPB)          state_nx = S_DONE;
        else if (k + 1'b1 < cur.nslices)   state_nx = S_REQ;
        else if (cur.op == OP_LDDCP)       state_nx = S_DCP;
        else                               state_nx = S_DONE;
      end
      S_CPR:  state_nx = S_DONE;
      S_DCP:  state_nx = S_WB;
      S_WB:   if (c == 2'd2) state_nx = S_DONE;
      S_DONE: state_nx = S_IDLE;
      default: state_nx = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cur    <= '0;
      k      <= '0;
      c      <= '0;
      size_q <= '0;
    end else begin
      state <= state_nx;
      if (state == S_IDLE && instr_valid) begin
        cur <= instr;
        k   <= '0;
        c   <= '0;
      end
      if (state == S_WAIT && lsu_resp_valid) k <= k + 1'b1;
      if (state == S_WB) c <= c + 2'd1;
      if (state == S_CPR || state == S_DCP) size_q <= codec_size;
    end
  end

  // ---------------- handshake rules
  // A request waiting for ready must not change.
  assert property (@(posedge clk) disable iff (!rst_n)
    lsu_req_valid && !lsu_req_ready |=> lsu_req_valid && $stable(lsu_req));
  // Responses only arrive for an accepted request.
  assert property (@(posedge clk) disable iff (!rst_n)
    lsu_resp_valid |-> state == S_WAIT);
endmodule
