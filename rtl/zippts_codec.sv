// zippts_codec: the Compress/Decompress Logic of the ZipPts buffer.
//
// Compression (decompress = 0). The buffer holds num_pts half-precision
// points, point i at bits [48i +: 48] with x in the low, z in the high 16 bits.
// For each coordinate the 6-bit <sign,exponent> tuple (bits 15:10 of the
// half) is compared across the num_pts points; if all are equal the
// coordinate's flag (cX, cY, cZ) is set and the tuple is kept once. The
// output is a bit stream, stream bit k being buffer bit k:
//   [0]   cX   [1] cY   [2] cZ                        (3 flag bits first)
//   then the 10-bit mantissas x0 y0 z0 x1 y1 z1 ... of all points, unchanged
//   then one 6-bit tuple for each flagged coordinate, in x, y, z order
//   then, point by point, the 6-bit tuples of the unflagged coordinates
// All bits after the stream are zero (zero padding of the last slice).
// size_bytes = ceil((3 + 30n + 6*nc + 6*n*(3-nc)) / 8), nc = flags set.
// Decompression (decompress = 1) reads the flags from the stream, rebuilds the
// num_pts points at their uncompressed positions and zeroes the rest.
//
// Combinational: the sequencer registers the result into the buffer in one
// cycle (one compress or decompress micro-operation). The field order
// (flags, mantissas, shared tuples, unshared tuples) follows the paper's
// compression figure; the bit order inside the stream, the flag bit positions
// and the point layout of the uncompressed buffer are this design's choice.
// A leaf with num_pts = 0 gets all flags clear. num_pts above 16 is treated
// as 16.
module zippts_codec
  import kdb_pkg::*;
(
  input  logic [BUF_W-1:0]  buf_in,
  input  logic [NPTS_W-1:0] num_pts,
  input  logic              decompress,
  output logic [BUF_W-1:0]  buf_out,
  output logic [FLAG_W-1:0] flags,        // {cZ, cY, cX}
  output logic [15:0]       size_bytes
);
  int unsigned n;

  function automatic int unsigned popc3(input logic [2:0] f);
    return int'(f[0]) + int'(f[1]) + int'(f[2]);
  endfunction

  // rank of coordinate c among the coordinates with flag value v
  function automatic int unsigned rank3(input logic [2:0] f, input int unsigned c,
                                        input logic v);
    int unsigned r = 0;
    for (int unsigned k = 0; k < 3; k++) if (k < c && f[k] == v) r++;
    return r;
  endfunction

  logic [FLAG_W-1:0] f_cmp, f_dcp;
  logic [BUF_W-1:0]  cmp_out, dcp_out;
  int unsigned       nc, nu, sbase, ubase, bits;

  assign n = (int'(num_pts) > MAX_PTS) ? MAX_PTS : int'(num_pts);

  // ---------------- compression
  always_comb begin
    automatic int unsigned cnc, cnu, cs, cu;
    for (int unsigned c = 0; c < 3; c++) begin
      f_cmp[c] = (n != 0);
      for (int unsigned i = 1; i < MAX_PTS; i++)
        if (i < n && buf_in[48*i + 16*c + 10 +: 6] != buf_in[16*c + 10 +: 6]) f_cmp[c] = 1'b0;
    end
    cnc = popc3(f_cmp);
    cnu = 3 - cnc;
    cs  = 3 + 30 * n;
    cu  = cs + 6 * cnc;
    cmp_out = '0;
    cmp_out[2:0] = f_cmp;
    for (int unsigned i = 0; i < MAX_PTS; i++) begin
      if (i < n) begin
        for (int unsigned c = 0; c < 3; c++) begin
          cmp_out[3 + 10*(3*i + c) +: 10] = buf_in[48*i + 16*c +: 10];
          if (!f_cmp[c])
            cmp_out[cu + 6*(i*cnu + rank3(f_cmp, c, 1'b0)) +: 6] = buf_in[48*i + 16*c + 10 +: 6];
        end
      end
    end
    for (int unsigned c = 0; c < 3; c++)
      if (f_cmp[c]) cmp_out[cs + 6*rank3(f_cmp, c, 1'b1) +: 6] = buf_in[16*c + 10 +: 6];
  end

  // ---------------- decompression
  always_comb begin
    automatic int unsigned dnc, dnu, ds, du;
    f_dcp = buf_in[2:0];
    dnc = popc3(f_dcp);
    dnu = 3 - dnc;
    ds  = 3 + 30 * n;
    du  = ds + 6 * dnc;
    dcp_out = '0;
    for (int unsigned i = 0; i < MAX_PTS; i++) begin
      if (i < n) begin
        for (int unsigned c = 0; c < 3; c++) begin
          dcp_out[48*i + 16*c +: 10] = buf_in[3 + 10*(3*i + c) +: 10];
          if (f_dcp[c]) dcp_out[48*i + 16*c + 10 +: 6] = buf_in[ds + 6*rank3(f_dcp, c, 1'b1) +: 6];
          else          dcp_out[48*i + 16*c + 10 +: 6] = buf_in[du + 6*(i*dnu + rank3(f_dcp, c, 1'b0)) +: 6];
        end
      end
    end
  end

  always_comb begin
    flags   = decompress ? f_dcp : f_cmp;
    buf_out = decompress ? dcp_out : cmp_out;
    nc      = popc3(flags);
    nu      = 3 - nc;
    sbase   = 3 + 30 * n;
    ubase   = sbase + 6 * nc;
    bits    = ubase + 6 * n * nu;
    size_bytes = 16'((bits + 7) / 8);
  end
endmodule
