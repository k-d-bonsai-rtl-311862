// vec_sqdiff_unit: vector square-of-differences unit behind SQDWEL / SQDWEH.
//
// Four (A-B')^2 FUs work side by side, one per 32-bit lane of the 128-bit
// NEON datapath. vA carries four binary32 values (normally the same query
// coordinate broadcast to all lanes); vB' carries eight binary16 values (one
// coordinate of eight leaf points). A low/high select picks lanes 0-3
// (SQDWEL) or 4-7 (SQDWEH) of vB' for the four FUs. Lane i of v_sq_diff and
// v_error receives (vA[i] - vB'[i or i+4])^2 and its worst-case error.
// Lane widths, lane count and the low/high split follow the paper; the
// pipeline timing is that of sqdiff_fu (3 cycles, one instruction per cycle).
module vec_sqdiff_unit #(
  parameter int unsigned LANES = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 high,       // 0: SQDWEL, 1: SQDWEH
  input  logic [32*LANES-1:0]  va,         // LANES x binary32
  input  logic [32*LANES-1:0]  vb,         // 2*LANES x binary16
  output logic                 out_valid,
  output logic [32*LANES-1:0]  v_sq_diff,
  output logic [32*LANES-1:0]  v_error
);
  logic [16*LANES-1:0] vb_sel;
  logic [LANES-1:0]    lane_valid;

  assign vb_sel = high ? vb[32*LANES-1:16*LANES] : vb[16*LANES-1:0];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    sqdiff_fu u_fu (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .a        (va[32*i +: 32]),
      .b_h      (vb_sel[16*i +: 16]),
      .out_valid(lane_valid[i]),
      .sq_diff  (v_sq_diff[32*i +: 32]),
      .error    (v_error[32*i +: 32])
    );
  end

  assign out_valid = &lane_valid;           // all lanes run in lockstep
endmodule
