// zippts_buffer: the ZipPts buffer, storage for one k-d tree leaf.
//
// Holds 7 slices of 128 bits (896 bits): room for 16 half-precision points
// (768 bits) or their compressed stream, which adds 3 flag bits in front.
// Uncompressed, point i lies at bits [48i +: 48] (x, y, z from the low end).
//
// Ports, as in the paper: one 128-bit port to the load/store unit (a slice is
// written by a slice load, read by a slice store) and two 128-bit read ports to
// the vector register file. A write-back micro-operation names a coordinate
// c; read port 0 returns coordinate c of points 0-7 and read port 1 that of
// points 8-15, as eight 16-bit lanes each (point j in lane j). Besides these,
// the LDSPZPB path writes one 48-bit point and the Compress/Decompress Logic
// reads and rewrites the whole image.
//
// Timing: writes take effect at the rising clock edge, one command per cycle;
// reads are combinational. Asynchronous reset clears the buffer, so unused
// slices read as zero padding. The point layout and the command encoding are
// this design's choices.
module zippts_buffer
  import kdb_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  buf_cmd_e             cmd,
  input  logic [NPTS_W-2:0]    pt_idx,      // 0..15
  input  logic [PT_W-1:0]      pt_data,
  input  logic [SLC_W-1:0]     slice_idx,   // 0..6, write and LSU read
  input  logic [SLICE_W-1:0]   slice_data,
  input  logic [BUF_W-1:0]     all_data,
  input  logic [1:0]           wb_coord,    // 0: x, 1: y, 2: z
  output logic [BUF_W-1:0]     image,
  output logic [SLICE_W-1:0]   lsu_rdata,
  output logic [SLICE_W-1:0]   vrf_rdata0,  // coordinate of points 0-7
  output logic [SLICE_W-1:0]   vrf_rdata1   // coordinate of points 8-15
);
  logic [SLICE_W-1:0] mem [NUM_SLICES];
  logic [BUF_W-1:0]   img;

  always_comb
    for (int s = 0; s < NUM_SLICES; s++) img[SLICE_W*s +: SLICE_W] = mem[s];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_SLICES; s++) mem[s] <= '0;
    end else begin
      unique case (cmd)
        BUF_POINT: begin
          automatic logic [BUF_W-1:0] nxt = img;
          nxt[PT_W*pt_idx +: PT_W] = pt_data;
          for (int s = 0; s < NUM_SLICES; s++) mem[s] <= nxt[SLICE_W*s +: SLICE_W];
        end
        BUF_SLICE: if (32'(slice_idx) < NUM_SLICES) mem[slice_idx] <= slice_data;
        BUF_ALL:   for (int s = 0; s < NUM_SLICES; s++) mem[s] <= all_data[SLICE_W*s +: SLICE_W];
        default: ;
      endcase
    end
  end

  assign image     = img;
  assign lsu_rdata = (32'(slice_idx) < NUM_SLICES) ? mem[slice_idx] : '0;

  always_comb begin
    for (int j = 0; j < 8; j++) begin
      vrf_rdata0[16*j +: 16] = img[PT_W*j       + 16*wb_coord +: 16];
      vrf_rdata1[16*j +: 16] = img[PT_W*(j + 8) + 16*wb_coord +: 16];
    end
  end
endmodule
