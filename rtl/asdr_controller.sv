// asdr_controller: two-phase frame sequencing and per-pixel sample counts.
//
// Phase I (sampling): the pixels on a grid of pitch d, (k*d, l*d) for
// k = 0..ceil((W-1)/d), l = 0..ceil((H-1)/d), are rendered with the full
// ns = NS_FULL points per ray. The adaptive sampling unit returns a code r
// per grid pixel (ns_r = ns >> r points suffice); it is stored in the
// sample-count table.
// Phase II (rendering): every pixel (x, y) of the W x H image is rendered.
// Its count is the bilinear interpolation of the four surrounding grid
// pixels, with fx = x mod d, fy = y mod d:
//   S = (d-fx)(d-fy) ns_00 + fx(d-fy) ns_10 + (d-fx)fy ns_01 + fx fy ns_11
// and the pixel uses the smallest allowed count ns >> r with
// (ns >> r) * d^2 >= S (no divider: the comparison is scaled by d^2).
// Its points are every 2^r-th of the full-rate points, with spacing
// delta0 << r; the color is sent out on the pixel port.
// Per ray the controller requests the ray from the bus (pixel coordinates ->
// origin p0, per-sample step dp, spacing delta0), announces the ray to the
// render engine, then issues its points in pairs to the encoding engine:
// point j is p0 + (j << r) * dp (Q0.16, wrapping), and asks for the color
// network when j mod 2^n_log2 == 0 (first point of an approximation group).
// It waits for the render engine before the next ray: one ray in flight.
// The two phases, the grid sampling and the bilinear interpolation follow
// the design; the bus protocol, the rounding of the interpolated count up to
// an allowed count and the grid placement are this implementation's choice.
module asdr_controller
  import asdr_pkg::*;
#(
  parameter int unsigned MAX_GX = 400,
  parameter int unsigned MAX_GY = 400
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              frame_done,
  output logic [1:0]        phase,
  input  logic [11:0]       img_w,
  input  logic [11:0]       img_h,
  input  logic [3:0]        d,
  input  logic [1:0]        n_log2,
  // ray bus
  output logic              ray_req_valid,
  input  logic              ray_req_ready,
  output logic [11:0]       ray_req_x,
  output logic [11:0]       ray_req_y,
  input  logic              ray_rsp_valid,
  output logic              ray_rsp_ready,
  input  logic [COORD_W-1:0] ray_p0 [3],
  input  logic [COORD_W-1:0] ray_dp [3],
  input  logic [7:0]        ray_delta,
  // points to the encoding engine
  output logic              pt_valid,
  input  logic              pt_ready,
  output logic [ENC_PTS-1:0] pt_pvalid,
  output logic [COORD_W-1:0] pt_x [ENC_PTS],
  output logic [COORD_W-1:0] pt_y [ENC_PTS],
  output logic [COORD_W-1:0] pt_z [ENC_PTS],
  output ptag_t             pt_tag [ENC_PTS],
  // render engine
  output logic              ray_begin,
  output logic [NS_W-1:0]   ray_m,
  output logic [11:0]       ray_dl,
  input  logic              rend_done,
  input  logic [CODE_W-1:0] rend_code,
  input  col_t              rend_pixel [3],
  // pixels
  output logic              pix_valid,
  input  logic              pix_ready,
  output logic [11:0]       pix_x,
  output logic [11:0]       pix_y,
  output col_t              pix_rgb [3],
  // statistics
  output logic [31:0]       cnt_grid_rays,
  output logic [31:0]       cnt_reduced_pixels
);
  localparam int unsigned GXW = $clog2(MAX_GX);
  localparam int unsigned GYW = $clog2(MAX_GY);

  typedef enum logic [2:0] {C_IDLE, C_REQ, C_RSP, C_PTS, C_WAIT, C_PIX} cstate_t;
  cstate_t st;

  logic [CODE_W-1:0] tab [MAX_GY][MAX_GX];

  logic [11:0]       px, py;        // pixel of the current ray
  logic [GXW-1:0]    gx;
  logic [GYW-1:0]    gy;
  logic [3:0]        fx, fy;
  logic [CODE_W-1:0] r;             // stride code of the current ray
  logic [NS_W-1:0]   j;
  logic [COORD_W-1:0] p0 [3], dp [3];

  // ---------------- bilinear interpolation of the count ----------------
  logic [GXW-1:0]    gx1;
  logic [GYW-1:0]    gy1;
  logic [CODE_W-1:0] c00, c10, c01, c11, r_interp;
  logic [19:0]       s_int, wx0, wx1, wy0, wy1;
  always_comb begin
    logic [7:0] dd;
    gx1 = (32'(gx) + 1 < MAX_GX) ? gx + 1'b1 : gx;
    gy1 = (32'(gy) + 1 < MAX_GY) ? gy + 1'b1 : gy;
    c00 = tab[gy][gx];
    c10 = tab[gy][gx1];
    c01 = tab[gy1][gx];
    c11 = tab[gy1][gx1];
    wx1 = 20'(fx);
    wx0 = 20'(d) - 20'(fx);
    wy1 = 20'(fy);
    wy0 = 20'(d) - 20'(fy);
    s_int = wx0 * wy0 * 20'(NS_FULL >> c00) + wx1 * wy0 * 20'(NS_FULL >> c10)
          + wx0 * wy1 * 20'(NS_FULL >> c01) + wx1 * wy1 * 20'(NS_FULL >> c11);
    dd = 8'(d) * 8'(d);
    r_interp = '0;
    for (int k = 0; k < NUM_NS; k++)
      if (20'(NS_FULL >> k) * 20'(dd) >= s_int) r_interp = CODE_W'(k);
  end

  // ---------------- points ----------------
  logic [NS_W-1:0] m_cur;
  assign m_cur = NS_W'(NS_FULL >> r);
  always_comb begin
    for (int p = 0; p < ENC_PTS; p++) begin
      logic [NS_W-1:0]    jj;
      logic [COORD_W-1:0] step;
      jj   = j + NS_W'(p);
      step = COORD_W'(jj) << r;
      pt_pvalid[p] = jj < m_cur;
      pt_x[p] = p0[0] + step * dp[0];
      pt_y[p] = p0[1] + step * dp[1];
      pt_z[p] = p0[2] + step * dp[2];
      pt_tag[p].idx        = jj;
      pt_tag[p].need_color = (jj & NS_W'((1 << n_log2) - 1)) == '0;
    end
  end

  assign busy          = st != C_IDLE;
  assign ray_req_valid = st == C_REQ;
  assign ray_req_x     = px;
  assign ray_req_y     = py;
  assign ray_rsp_ready = st == C_RSP;
  assign pt_valid      = st == C_PTS;
  assign pix_valid     = st == C_PIX;
  assign pix_x         = px;
  assign pix_y         = py;
  assign ray_m         = m_cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE;
      phase <= 2'd0;
      frame_done <= 1'b0;
      px <= '0; py <= '0; gx <= '0; gy <= '0; fx <= '0; fy <= '0;
      r <= '0; j <= '0;
      ray_begin <= 1'b0;
      ray_dl <= '0;
      for (int c = 0; c < 3; c++) begin
        p0[c] <= '0; dp[c] <= '0; pix_rgb[c] <= '0;
      end
      cnt_grid_rays <= '0;
      cnt_reduced_pixels <= '0;
    end else begin
      frame_done <= 1'b0;
      ray_begin  <= 1'b0;
      case (st)
        C_IDLE: if (start) begin
          phase <= 2'd1;
          px <= '0; py <= '0; gx <= '0; gy <= '0; fx <= '0; fy <= '0;
          r  <= '0;
          st <= C_REQ;
        end
        C_REQ: if (ray_req_ready) st <= C_RSP;
        C_RSP: if (ray_rsp_valid) begin
          p0 <= ray_p0;
          dp <= ray_dp;
          ray_dl    <= 12'(ray_delta) << r;
          ray_begin <= 1'b1;
          j  <= '0;
          st <= C_PTS;
        end
        C_PTS: if (pt_ready) begin
          j <= j + NS_W'(ENC_PTS);
          if (32'(j) + ENC_PTS >= 32'(m_cur)) st <= C_WAIT;
        end
        C_WAIT: if (rend_done) begin
          if (phase == 2'd1) begin
            tab[gy][gx] <= rend_code;
            cnt_grid_rays <= cnt_grid_rays + 1;
            if (px >= img_w - 1'b1) begin
              px <= '0;
              gx <= '0;
              if (py >= img_h - 1'b1) begin
                // switch to the rendering phase
                phase <= 2'd2;
                py <= '0; gy <= '0;
              end else begin
                py <= py + 12'(d);
                gy <= gy + 1'b1;
              end
            end else begin
              px <= px + 12'(d);
              gx <= gx + 1'b1;
            end
            st <= C_REQ;
          end else begin
            pix_rgb <= rend_pixel;
            if (r != '0) cnt_reduced_pixels <= cnt_reduced_pixels + 1;
            st <= C_PIX;
          end
        end
        C_PIX: if (pix_ready) begin
          st <= C_REQ;
          if (px == img_w - 1'b1) begin
            px <= '0; gx <= '0; fx <= '0;
            if (py == img_h - 1'b1) begin
              st <= C_IDLE;
              phase <= 2'd0;
              frame_done <= 1'b1;
            end else begin
              py <= py + 1'b1;
              if (fy == d - 1'b1) begin
                fy <= '0;
                gy <= gy + 1'b1;
              end else fy <= fy + 1'b1;
            end
          end else begin
            px <= px + 1'b1;
            if (fx == d - 1'b1) begin
              fx <= '0;
              gx <= gx + 1'b1;
            end else fx <= fx + 1'b1;
          end
        end
        default: ;
      endcase
      // the count of a phase-II ray is fixed when its request is issued
      if (st == C_REQ && phase == 2'd2) r <= r_interp;
      if (st == C_REQ && phase == 2'd1) r <= '0;
    end
  end
endmodule
