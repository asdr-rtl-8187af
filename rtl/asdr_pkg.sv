// asdr_pkg: constants, types and small pure functions shared by the ASDR
// neural-rendering accelerator.
//
// The defaults describe the edge configuration of the accelerator:
//   * 16 multi-resolution embedding tables (levels), the Instant-NGP scheme
//     the accelerator is built around.
//   * Each table entry is a 2-dimensional feature of two 8-bit values
//     (a 16-bit entry), as the crossbar drawing of the design shows
//     ("a 2-dim vector using a row of 16 1-bit cells").
//   * The 2 MB of embedding crossbars hold 16 tables of 2^16 entries each
//     (16 x 2^16 x 2 B = 2 MB). The server configuration (64 MB) would hold
//     the full 2^19-entry tables.
//   * A memory crossbar ("Mem Xbar") serves one row per cycle and holds 64
//     entries; the crossbar number is the entry address divided by 64, as in
//     the address-generation example of the design (address 1700 -> xbar 26).
//   * Level resolutions grow by 2^(1/3) per level from 16 to 512
//     (16, 20, 25, 32, ...), the first four of which the design's
//     table-mapping drawing prints.
// A level is "low resolution" (stored de-hashed, with copies) when its whole
// grid fits in one table, i.e. 3*coordinate_bits <= T_LOG2; every other level
// is hashed.
package asdr_pkg;

  // ---------------- encoding ----------------
  localparam int unsigned NUM_LEVELS   = 16;
  localparam int unsigned LEVEL_W      = 4;
  localparam int unsigned FEAT_DIM     = 2;      // features per table entry
  localparam int unsigned FEAT_W       = 8;      // bits per feature
  localparam int unsigned ENTRY_W      = FEAT_DIM * FEAT_W;
  localparam int unsigned T_LOG2       = 16;     // entries per table (log2)
  localparam int unsigned MEM_AW       = LEVEL_W + T_LOG2; // global entry address
  localparam int unsigned XBAR_ROWS_LOG2 = 6;    // 64 rows per crossbar
  localparam int unsigned XBAR_W       = MEM_AW - XBAR_ROWS_LOG2;
  localparam int unsigned COORD_W      = 16;     // point coordinate, Q0.16 in [0,1)
  localparam int unsigned GRID_W       = 10;     // vertex coordinate (up to 512)
  localparam int unsigned FRAC_W       = 8;      // trilinear weight fraction
  localparam int unsigned ENC_W        = NUM_LEVELS * FEAT_DIM; // 32 encoded features
  localparam int unsigned AG_LANES     = 16;     // address units (edge config)
  localparam int unsigned ENC_PTS      = AG_LANES / 8; // points encoded in parallel
  localparam int unsigned ENC_LANES    = ENC_PTS * 8;  // vertex lookups per batch

  // Hash primes of Instant-NGP (pi_1 = 1).
  localparam logic [31:0] PI1 = 32'd1;
  localparam logic [31:0] PI2 = 32'd2654435761;
  localparam logic [31:0] PI3 = 32'd805459861;

  // ---------------- MLP ----------------
  localparam int unsigned ACT_W  = 8;   // activations and weights are int8
  localparam int unsigned ACC_W  = 32;
  localparam int unsigned XBAR_N = 64;  // CIM crossbar is 64 x 64
  localparam int unsigned ADC_W  = 5;   // 5-bit ADC
  localparam int unsigned MLP_MAXW = 64;

  // ---------------- rendering ----------------
  localparam int unsigned NS_FULL   = 192; // samples per ray at full rate
  localparam int unsigned NS_W      = 8;
  localparam int unsigned NUM_NS    = 5;   // ns, ns/2, ns/4, ns/8, ns/16 (192..12)
  localparam int unsigned CODE_W    = 3;   // stride code r: ns_r = ns >> r
  localparam int unsigned COL_W     = 8;   // 8-bit color channel
  localparam int unsigned COLACC_W  = 16;  // render result precision (1/256 LSB)

  typedef logic signed [FEAT_W-1:0] feat_t;
  typedef logic [MEM_AW-1:0]        maddr_t;
  typedef logic [COL_W-1:0]         col_t;

  // One address-buffer entry: the vertex addresses of ENC_PTS points at one level.
  typedef struct packed {
    logic [LEVEL_W-1:0]                  level;
    logic [ENC_PTS-1:0]                  pvalid;
    logic [ENC_LANES-1:0][MEM_AW-1:0]    addr;   // lane = point*8 + vertex
    logic [ENC_PTS-1:0][2:0][FRAC_W-1:0] frac;   // [point][x,y,z]
  } abatch_t;

  // One embed-buffer entry: the fetched vertex embeddings of one batch.
  typedef struct packed {
    logic [LEVEL_W-1:0]                  level;
    logic [ENC_PTS-1:0]                  pvalid;
    logic [ENC_LANES-1:0][ENTRY_W-1:0]   emb;
    logic [ENC_PTS-1:0][2:0][FRAC_W-1:0] frac;
  } ebatch_t;

  // Per-point tag carried through the encoding and MLP engines.
  typedef struct packed {
    logic [NS_W-1:0] idx;        // point index along the ray
    logic            need_color; // run the color MLP for this point
  } ptag_t;

  // Grid resolution N_l = floor(16 * 2^(l/3)).
  function automatic int unsigned level_res(input int unsigned l);
    int unsigned base;
    base = 16 << (l / 3);
    case (l % 3)
      0: return base;
      1: return (base * 645) >> 9;   // * 1.2599
      default: return (base * 813) >> 9; // * 1.5874
    endcase
  endfunction

  // Bits of a vertex coordinate on level l: ceil(log2(N_l)).
  function automatic int unsigned level_cbits(input int unsigned l);
    return $clog2(level_res(l));
  endfunction

  function automatic bit level_dense(input int unsigned l);
    return (3 * level_cbits(l)) <= T_LOG2;
  endfunction

  // log2 of the number of copies of a dense table.
  function automatic int unsigned level_copy_log2(input int unsigned l);
    return T_LOG2 - 3 * level_cbits(l);
  endfunction

endpackage
