// kdb_bonsai_top: the K-D Bonsai additions to a CPU core.
//
// Two units are added next to an existing load/store unit and vector register
// file, as in the paper's CPU figure:
//  * the compression/decompression unit: the ZipPts buffer
//    (zippts_buffer), its Compress/Decompress Logic (zippts_codec), the
//    single-to-half conversion of the LDSPZPB load path (three fp32_to_fp16,
//    one per coordinate) and the sequencer that turns LDSPZPB, CPRZPB, STZPB
//    and LDDCP into micro-operations (bonsai_sequencer);
//  * the vector square-of-differences unit for SQDWEL/SQDWEH
//    (vec_sqdiff_unit, four (A-B')^2 FUs).
// The load/store unit and the register file are not part of this design: the
// top exposes a 128-bit LSU request/response channel and the two 128-bit
// register-file write ports of the ZipPts buffer, and takes the SQDWE
// operands (vA, vB', low/high) already read from the register file.
//
// Timing: see bonsai_sequencer for the ZipPts instructions and sqdiff_fu for
// the 3-cycle, fully pipelined SQDWE path. The two paths are independent.
module kdb_bonsai_top
  import kdb_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // ZipPts instructions
  input  logic                instr_valid,
  output logic                instr_ready,
  input  bonsai_instr_t       instr,
  output logic                instr_done,
  output logic [15:0]         r_size,
  output logic [FLAG_W-1:0]   zip_flags,     // {cZ, cY, cX} of the current image
  // load/store unit
  output logic                lsu_req_valid,
  input  logic                lsu_req_ready,
  output lsu_req_t            lsu_req,
  input  logic                lsu_resp_valid,
  input  logic [SLICE_W-1:0]  lsu_rdata,
  // vector register file write ports (LDDCP write-back)
  output vrf_wr_t             vrf_wr0,
  output vrf_wr_t             vrf_wr1,
  // SQDWEL / SQDWEH
  input  logic                sqd_valid,
  input  logic                sqd_high,
  input  logic [SLICE_W-1:0]  sqd_va,
  input  logic [SLICE_W-1:0]  sqd_vb,
  output logic                sqd_out_valid,
  output logic [SLICE_W-1:0]  sqd_sq_diff,
  output logic [SLICE_W-1:0]  sqd_error
);
  buf_cmd_e            buf_cmd;
  logic [NPTS_W-2:0]   buf_pt_idx;
  logic [SLC_W-1:0]    buf_slice_idx;
  logic [1:0]          buf_wb_coord;
  logic [SLICE_W-1:0]  buf_lsu_rdata, buf_vrf_rdata0, buf_vrf_rdata1;
  logic [BUF_W-1:0]    image, codec_out;
  logic [NPTS_W-1:0]   codec_num_pts;
  logic                codec_decompress;
  logic [15:0]         codec_size;
  logic [PT_W-1:0]     pt_half;

  // LDSPZPB: x, y, z binary32 in the low 96 bits of the load data
  for (genvar c = 0; c < COORDS; c++) begin : g_cvt
    fp32_to_fp16 u_cvt (.f_in(lsu_rdata[32*c +: 32]), .h_out(pt_half[16*c +: 16]));
  end

  bonsai_sequencer u_seq (
    .clk, .rst_n,
    .instr_valid, .instr_ready, .instr,
    .done(instr_done), .r_size,
    .lsu_req_valid, .lsu_req_ready, .lsu_req, .lsu_resp_valid,
    .buf_cmd, .buf_pt_idx, .buf_slice_idx, .buf_wb_coord,
    .buf_lsu_rdata, .buf_vrf_rdata0, .buf_vrf_rdata1,
    .codec_num_pts, .codec_decompress, .codec_size,
    .vrf_wr0, .vrf_wr1
  );

  zippts_buffer u_buf (
    .clk, .rst_n,
    .cmd(buf_cmd), .pt_idx(buf_pt_idx), .pt_data(pt_half),
    .slice_idx(buf_slice_idx), .slice_data(lsu_rdata), .all_data(codec_out),
    .wb_coord(buf_wb_coord), .image,
    .lsu_rdata(buf_lsu_rdata), .vrf_rdata0(buf_vrf_rdata0), .vrf_rdata1(buf_vrf_rdata1)
  );

  zippts_codec u_codec (
    .buf_in(image), .num_pts(codec_num_pts), .decompress(codec_decompress),
    .buf_out(codec_out), .flags(zip_flags), .size_bytes(codec_size)
  );

  vec_sqdiff_unit #(.LANES(4)) u_vsq (
    .clk, .rst_n,
    .in_valid(sqd_valid), .high(sqd_high), .va(sqd_va), .vb(sqd_vb),
    .out_valid(sqd_out_valid), .v_sq_diff(sqd_sq_diff), .v_error(sqd_error)
  );
endmodule
