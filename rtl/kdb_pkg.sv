// Shared constants and types for the K-D Bonsai leaf-compression hardware.
//
// A k-d tree leaf holds at most MAX_PTS points. Each point is kept in the
// ZipPts buffer as three IEEE-754 half-precision coordinates (x, y, z). The
// buffer is exchanged with the load/store unit and the vector register file
// in 128-bit slices. Compressed data starts with three flag bits (cX, cY, cZ),
// so it can be 3 bits longer than the 768 bits of 16 uncompressed points;
// the buffer therefore spans 7 slices (896 bits), the last one mostly unused.
//
// The numbers 16 points, 128-bit slices/ports, 5-bit exponent, 10-bit mantissa
// follow the paper; the opcode encoding and the request/response structs are
// this design's own choice.
package kdb_pkg;

  localparam int unsigned MAX_PTS    = 16;   // points per ZipPts buffer
  localparam int unsigned COORDS     = 3;    // x, y, z
  localparam int unsigned SLICE_W    = 128;  // slice / port width
  localparam int unsigned H_W        = 16;   // half-precision coordinate
  localparam int unsigned PT_W       = COORDS * H_W;          // 48-bit point
  localparam int unsigned FLAG_W     = COORDS;                // cX, cY, cZ
  localparam int unsigned RAW_W      = MAX_PTS * PT_W;        // 768
  localparam int unsigned NUM_SLICES = (RAW_W + FLAG_W + SLICE_W - 1) / SLICE_W; // 7
  localparam int unsigned BUF_W      = NUM_SLICES * SLICE_W;  // 896
  localparam int unsigned NPTS_W     = $clog2(MAX_PTS + 1);   // 5: 0..16
  localparam int unsigned SLC_W      = $clog2(NUM_SLICES + 1);// 3: 0..7
  localparam int unsigned VREG_W     = 5;    // 32 architectural vector registers
  localparam int unsigned ADDR_W     = 64;

  // Bonsai-extension instructions handled by the ZipPts sequencer.
  typedef enum logic [1:0] {
    OP_LDSPZPB = 2'd0,  // load one fp32 point, convert, place at index
    OP_CPRZPB  = 2'd1,  // compress the buffer in place, return size in bytes
    OP_STZPB   = 2'd2,  // store N slices to consecutive addresses
    OP_LDDCP   = 2'd3   // load N slices, decompress, write back 6 vector registers
  } bonsai_op_e;

  typedef struct packed {
    bonsai_op_e              op;
    logic [ADDR_W-1:0]       addr;      // r_addr
    logic [NPTS_W-1:0]       index;     // r_index (LDSPZPB)
    logic [NPTS_W-1:0]       num_pts;   // r_num_pts (CPRZPB, LDDCP)
    logic [SLC_W-1:0]        nslices;   // #ZipPtsSlices (STZPB, LDDCP)
    logic [VREG_W-1:0]       v_base;    // v_base (LDDCP)
  } bonsai_instr_t;

  // One request to the load/store unit: a 128-bit load or store.
  typedef struct packed {
    logic                    we;
    logic [ADDR_W-1:0]       addr;
    logic [SLICE_W-1:0]      wdata;
  } lsu_req_t;

  // One vector-register write port.
  typedef struct packed {
    logic                    we;
    logic [VREG_W-1:0]       idx;
    logic [SLICE_W-1:0]      data;
  } vrf_wr_t;

  // Buffer update commands issued by the sequencer.
  typedef enum logic [1:0] {
    BUF_NOP   = 2'd0,
    BUF_POINT = 2'd1,   // write one 48-bit point at an index
    BUF_SLICE = 2'd2,   // write one 128-bit slice
    BUF_ALL   = 2'd3    // write the whole image (compress/decompress result)
  } buf_cmd_e;

endpackage
