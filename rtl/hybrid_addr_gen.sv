// hybrid_addr_gen: address generation for the encoding engine.
//
// For PTS sample points at one resolution level the unit locates the voxel
// that holds each point, enumerates its eight vertices and turns each vertex
// into a global entry address of the embedding crossbars. NLANES = 8*PTS
// address units work in parallel (16 in the edge configuration, i.e. two
// points per cycle). Each unit holds a hash unit and a low-resolution unit;
// a per-level flag selects between them (the multiplexer of the hybrid
// address generator): low-resolution levels use the de-hashed, bit-reordered
// address with the point's lane number as copy ID, the other levels use the
// spatial hash. The global address is {level, table address}.
//
// Point coordinates are Q0.16 in [0,1). For level l with resolution N_l the
// scaled position p*N_l gives the voxel corner (integer part) and an 8-bit
// fraction per axis, which is passed on as the trilinear weight. Vertex v
// has offsets dx = v[2], dy = v[1], dz = v[0]. Purely combinational; the
// engine registers the result into the address buffer.
module hybrid_addr_gen
  import asdr_pkg::*;
#(
  parameter int unsigned NLANES = 16,
  localparam int unsigned PTS = NLANES / 8
) (
  input  logic [LEVEL_W-1:0]  level,
  input  logic [COORD_W-1:0]  px [PTS],
  input  logic [COORD_W-1:0]  py [PTS],
  input  logic [COORD_W-1:0]  pz [PTS],
  output maddr_t              addr [PTS][8],
  output logic [FRAC_W-1:0]   fx [PTS],
  output logic [FRAC_W-1:0]   fy [PTS],
  output logic [FRAC_W-1:0]   fz [PTS]
);
  // Per-level constants, computed at elaboration.
  logic [GRID_W:0] res_tab  [NUM_LEVELS];
  logic [3:0]      cb_tab   [NUM_LEVELS];
  logic            dense_tab[NUM_LEVELS];
  for (genvar l = 0; l < NUM_LEVELS; l++) begin : g_lvl
    assign res_tab[l]   = (GRID_W+1)'(level_res(l));
    assign cb_tab[l]    = 4'(level_cbits(l));
    assign dense_tab[l] = level_dense(l);
  end

  for (genvar p = 0; p < PTS; p++) begin : g_pt
    logic [COORD_W+GRID_W:0] sx, sy, sz;
    logic [GRID_W-1:0]       bx, by, bz;
    always_comb begin
      sx = (COORD_W+GRID_W+1)'(px[p]) * (COORD_W+GRID_W+1)'(res_tab[level]);
      sy = (COORD_W+GRID_W+1)'(py[p]) * (COORD_W+GRID_W+1)'(res_tab[level]);
      sz = (COORD_W+GRID_W+1)'(pz[p]) * (COORD_W+GRID_W+1)'(res_tab[level]);
      bx = sx[COORD_W +: GRID_W];
      by = sy[COORD_W +: GRID_W];
      bz = sz[COORD_W +: GRID_W];
      fx[p] = sx[COORD_W-1 -: FRAC_W];
      fy[p] = sy[COORD_W-1 -: FRAC_W];
      fz[p] = sz[COORD_W-1 -: FRAC_W];
    end
    for (genvar v = 0; v < 8; v++) begin : g_vtx
      logic [GRID_W-1:0] vx, vy, vz;
      logic [T_LOG2-1:0] h_idx, l_idx;
      assign vx = bx + GRID_W'(v >> 2 & 1);
      assign vy = by + GRID_W'(v >> 1 & 1);
      assign vz = bz + GRID_W'(v & 1);
      hash_unit u_hash (.x(vx), .y(vy), .z(vz), .index(h_idx));
      lowres_unit u_low (.x(vx), .y(vy), .z(vz), .cb(cb_tab[level]),
                         .copy_id(T_LOG2'(p)), .addr(l_idx));
      assign addr[p][v] = {level, dense_tab[level] ? l_idx : h_idx};
    end
  end
endmodule
