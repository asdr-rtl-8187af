// render_engine: the volume rendering engine of one ray.
//
// ray_begin announces a ray: its number of points m, the approximation group
// size 2^n_log2 and the point spacing delta. MLP results are written into the
// density & color buffer as they arrive (pt_we); when m results are in, the
// engine walks the ray once, one point per cycle:
//   * a point with a computed color is used as is; any other point gets its
//     color from the approximation unit, using the first points of its own
//     group (a) and of the next group (b);
//   * the RGB computation unit composites the point into all NUM_NS renders.
// Two cycles after the walk the adaptive sampling unit has compared the
// renders; done pulses with the pixel color (render 0) and the sample-count
// code. The code is meaningful in the first (sampling) phase only.
// Counters: cnt_approx counts points whose color was interpolated.
// Lint note: the adaptive sampling unit's per-render distance output (rd) is
// left open on purpose; only the chosen code is needed here.
module render_engine
  import asdr_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ray_begin,
  input  logic [NS_W-1:0]   ray_m,
  input  logic [1:0]        ray_n_log2,
  input  logic [11:0]       ray_delta,
  input  logic [COLACC_W-1:0] thr,
  // MLP results
  input  logic              pt_we,
  input  logic [NS_W-1:0]   pt_idx,
  input  logic [7:0]        pt_sigma,
  input  col_t              pt_rgb [3],
  input  logic              pt_hc,
  // result
  output logic              done,
  output col_t              pixel [3],
  output logic [CODE_W-1:0] code,
  output logic [COLACC_W-1:0] col [NUM_NS][3],
  output logic [31:0]       cnt_approx
);
  typedef enum logic [1:0] {R_IDLE, R_FILL, R_WALK, R_AS} rstate_t;
  rstate_t          st;
  logic [NS_W-1:0]  m, nwr, j;
  logic [1:0]       nl;
  logic [11:0]      dlt;
  logic [NS_W-1:0]  ridx [3];
  logic [7:0]       rsig [3];
  col_t             rrgb [3][3];
  logic             rhc  [3];
  logic [NS_W-1:0]  ga, gb;
  col_t             capx [3];
  col_t             cuse [3];
  logic             walk_v, as_start, as_v;
  logic [1:0]       as_wait;

  assign ga = j & ~NS_W'((1 << nl) - 1);
  assign gb = ga + NS_W'(1 << nl);
  assign ridx[0] = j;
  assign ridx[1] = ga;
  assign ridx[2] = gb;

  dc_buffer u_dcbuf (
    .clk, .rst_n, .clear(ray_begin), .we(pt_we), .widx(pt_idx), .wsigma(pt_sigma),
    .wrgb(pt_rgb), .whc(pt_hc), .ridx, .rsigma(rsig), .rrgb, .rhc
  );

  approx_unit u_approx (
    .c_a(rrgb[1]), .c_b(rrgb[2]), .b_valid(gb < m && rhc[2]),
    .k(3'(j - ga)), .n_log2(nl), .c(capx)
  );

  assign cuse   = rhc[0] ? rrgb[0] : capx;
  assign walk_v = st == R_WALK;

  rgb_unit u_rgb (
    .clk, .rst_n, .start(ray_begin), .delta_in(dlt), .pt_valid(walk_v), .pt_idx(j),
    .pt_sigma(rsig[0]), .pt_rgb(cuse), .col, .pixel
  );

  adaptive_sample_unit u_as (
    .clk, .rst_n, .in_valid(as_start), .col, .thr, .out_valid(as_v), .code, .rd()
  );

  assign as_start = st == R_AS && as_wait == 2'd0;
  assign done     = as_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE;
      m <= '0; nwr <= '0; j <= '0; nl <= '0; dlt <= '0; as_wait <= '0;
      cnt_approx <= '0;
    end else begin
      if (ray_begin) begin
        st  <= R_FILL;
        m   <= ray_m;
        nl  <= ray_n_log2;
        dlt <= ray_delta;
        nwr <= '0;
        j   <= '0;
      end else begin
        case (st)
          R_FILL: begin
            if (pt_we) nwr <= nwr + 1'b1;
            if (nwr == m) st <= R_WALK;
          end
          R_WALK: begin
            if (!rhc[0]) cnt_approx <= cnt_approx + 1;
            j <= j + 1'b1;
            if (j == m - 1'b1) begin
              st      <= R_AS;
              as_wait <= 2'd0;
            end
          end
          R_AS: begin
            as_wait <= as_wait + 1'b1;
            if (as_wait == 2'd0) st <= R_IDLE;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
