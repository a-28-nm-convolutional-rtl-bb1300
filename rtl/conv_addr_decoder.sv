// conv_addr_decoder - locates the psums an input event updates.
//
// The psum SRAM is organised so that one 256-bit word holds the 16 psums of
// one 4x4 tile of one 28x28 feature map: word = k*49 + ty*7 + tx, lane =
// ry*4 + rx with output position (oy, ox) = (4*ty+ry, 4*tx+rx).  An event at
// pixel (x, y) updates outputs ox in [x-4, x] and oy in [y-4, y] (valid
// correlation), which always fall in the 2x2 tiles tx in {(x>>2)-1, x>>2},
// ty in {(y>>2)-1, y>>2}; those are the paper's four accesses loc0..loc3
// (loc[0] picks tx, loc[1] picks ty).  A tile outside 0..6 gives valid=0.
// For each lane the decoder gives whether it is touched and which kernel tap
// (dy*5+dx, dy = y-oy, dx = x-ox) it receives.  Purely combinational.
// The tile mapping is this design's reading of the paper's 16kB / 256-bit /
// four-access / 4x4-pool figures.
module conv_addr_decoder
  import spoon_pkg::*;
(
  input  logic [3:0] k,
  input  logic [4:0] x,
  input  logic [4:0] y,
  input  logic [1:0] loc,
  output logic       valid,
  output logic [8:0] addr,
  output logic       lane_en [16],
  output logic [4:0] lane_tap [16]
);
  int tx, ty, ox, oy, dx, dy;

  always_comb begin
    tx    = int'(x[4:2]) - 1 + int'(loc[0]);
    ty    = int'(y[4:2]) - 1 + int'(loc[1]);
    valid = (tx >= 0) && (tx < PMAP) && (ty >= 0) && (ty < PMAP);
    addr  = valid ? 9'(int'(k) * PMAP * PMAP + ty * PMAP + tx) : '0;
    for (int l = 0; l < 16; l++) begin
      oy = ty * 4 + l / 4;
      ox = tx * 4 + l % 4;
      dy = int'(y) - oy;
      dx = int'(x) - ox;
      lane_en[l]  = valid && dy >= 0 && dy < KSZ && dx >= 0 && dx < KSZ;
      lane_tap[l] = lane_en[l] ? 5'(dy * KSZ + dx) : '0;
    end
  end
endmodule
