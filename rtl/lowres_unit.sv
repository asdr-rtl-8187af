// lowres_unit: de-hashed table address for a low-resolution level.
//
// A low-resolution grid fits in its table with room to spare, so its entries
// are stored directly at an address built from the vertex coordinates, and
// the table is replicated to fill the space. The address is built by bit
// reordering and concatenation so that the eight vertices of one voxel land
// in eight different crossbars:
//
//   addr = { copy_id, x[1:0], y[1:0], z[1:0], x[cb-1:2], y[cb-1:2], z[cb-1:2] }
//
// With 64 entries per crossbar the crossbar number is addr >> 6, i.e. the
// two low bits of x, y and z, which differ between the vertices of a voxel.
// This reproduces the example of the design: vertex (6,10,4) of a 16^3 grid
// gives crossbar 40, (6,11,4) 44, (6,10,3) 43 and (6,11,3) 47. The copy ID
// sits in the high bits, as the design describes; cb is the coordinate width
// of the level (2..T_LOG2/3), copy_log2 = T_LOG2 - 3*cb. Combinational.
module lowres_unit
  import asdr_pkg::*;
#(
  parameter int unsigned T_BITS = asdr_pkg::T_LOG2
) (
  input  logic [GRID_W-1:0] x,
  input  logic [GRID_W-1:0] y,
  input  logic [GRID_W-1:0] z,
  input  logic [3:0]        cb,       // coordinate bits of this level
  input  logic [T_BITS-1:0] copy_id,  // only the low T_BITS-3*cb bits are used
  output logic [T_BITS-1:0] addr
);
  logic [T_BITS-1:0] hi_x, hi_y, hi_z, low6, cmask, mask_hi;
  logic [4:0]        hb;   // bits of the high coordinate parts: cb-2
  always_comb begin
    hb      = 5'(cb) - 5'd2;
    mask_hi = (T_BITS'(1) << hb) - T_BITS'(1);
    hi_x    = (T_BITS'(x) >> 2) & mask_hi;
    hi_y    = (T_BITS'(y) >> 2) & mask_hi;
    hi_z    = (T_BITS'(z) >> 2) & mask_hi;
    low6    = T_BITS'({x[1:0], y[1:0], z[1:0]});
    cmask   = (T_BITS'(1) << (T_BITS - 3 * int'(cb))) - T_BITS'(1);
    addr    = ((copy_id & cmask) << (3 * cb))
            | (low6 << (3 * hb))
            | (hi_x << (2 * hb)) | (hi_y << hb) | hi_z;
  end
endmodule
