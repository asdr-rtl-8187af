// tb_asdr_controller: the controller with a modelled ray bus and a
// modelled render engine (which returns random sample-count codes in phase I
// and a color derived from the pixel position in phase II). For several
// frames (image size, grid pitch d, group size) it checks:
//   * phase I requests exactly the grid pixels, in order, at 192 points;
//   * phase II requests every pixel in raster order, with the point count
//     interpolated from the four surrounding grid codes;
//   * every point position (p0 + (j << r) dp), index, color-request flag,
//     the ray spacing, the pixel port and the statistics counters.
module tb_asdr_controller;
  import asdr_pkg::*;
  logic clk = 0, rst_n = 0, start, busy, frame_done;
  logic [1:0] phase, n_log2;
  logic [11:0] img_w, img_h, ray_req_x, ray_req_y, ray_dl, pix_x, pix_y;
  logic [3:0] d;
  logic ray_req_valid, ray_req_ready, ray_rsp_valid, ray_rsp_ready;
  logic [COORD_W-1:0] ray_p0 [3], ray_dp [3];
  logic [7:0] ray_delta;
  logic pt_valid, pt_ready;
  logic [ENC_PTS-1:0] pt_pvalid;
  logic [COORD_W-1:0] pt_x [ENC_PTS], pt_y [ENC_PTS], pt_z [ENC_PTS];
  ptag_t pt_tag [ENC_PTS];
  logic ray_begin, rend_done, pix_valid, pix_ready;
  logic [NS_W-1:0] ray_m;
  logic [CODE_W-1:0] rend_code;
  col_t rend_pixel [3], pix_rgb [3];
  logic [31:0] cnt_grid_rays, cnt_reduced_pixels;
  int checks = 0, failures = 0;
  int code_of[int];      // grid code by x*4096+y
  asdr_controller dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic int p0_of(int x, int y, int c);
    return (x * 977 + y * 331 + c * 12345) & 16'hFFFF;
  endfunction
  function automatic int dp_of(int x, int y, int c);
    return (x + 3 * y + 50 * c + 17) & 16'hFFFF;
  endfunction

  // one ray: bus handshake, points, render result; returns the ray's r
  task automatic do_ray(int x, int y, int r, int nl, int code, bit ph2);
    int m, got;
    m = 192 >> r;
    while (!ray_req_valid) @(negedge clk);
    check(int'(ray_req_x) == x && int'(ray_req_y) == y, $sformatf("request (%0d,%0d) expected (%0d,%0d)", ray_req_x, ray_req_y, x, y));
    check(phase == (ph2 ? 2'd2 : 2'd1), "phase");
    repeat (($urandom >> 4) % 3) @(negedge clk);
    ray_req_ready = 1;
    @(negedge clk);
    ray_req_ready = 0;
    repeat (($urandom >> 4) % 3) @(negedge clk);
    ray_rsp_valid = 1;
    for (int c = 0; c < 3; c++) begin ray_p0[c] = COORD_W'(p0_of(x, y, c)); ray_dp[c] = COORD_W'(dp_of(x, y, c)); end
    ray_delta = 8'(x + y + 1);
    #1;
    while (!ray_rsp_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    ray_rsp_valid = 0;
    check(ray_begin, "ray_begin after the response");
    check(int'(ray_m) == m, $sformatf("pixel (%0d,%0d) m %0d expected %0d", x, y, ray_m, m));
    check(int'(ray_dl) == ((x + y + 1) << r), "ray spacing");
    got = 0;
    while (got < m) begin
      pt_ready = (($urandom >> 4) % 4) != 0;
      #1;
      if (pt_valid && pt_ready) begin
        for (int p = 0; p < ENC_PTS; p++) begin
          automatic int j = got + p;
          check(pt_pvalid[p] == (j < m), "point valid");
          if (j < m) begin
            check(int'(pt_x[p]) == ((p0_of(x, y, 0) + (j << r) * dp_of(x, y, 0)) & 16'hFFFF)
               && int'(pt_y[p]) == ((p0_of(x, y, 1) + (j << r) * dp_of(x, y, 1)) & 16'hFFFF)
               && int'(pt_z[p]) == ((p0_of(x, y, 2) + (j << r) * dp_of(x, y, 2)) & 16'hFFFF),
               $sformatf("point %0d position", j));
            check(int'(pt_tag[p].idx) == j && pt_tag[p].need_color == (j % (1 << nl) == 0), "point tag");
          end
        end
        got += ENC_PTS;
      end
      @(negedge clk);
    end
    pt_ready = 0;
    repeat (3 + ($urandom >> 4) % 5) begin
      check(!pt_valid, "no extra points");
      @(negedge clk);
    end
    rend_done = 1; rend_code = CODE_W'(code);
    for (int c = 0; c < 3; c++) rend_pixel[c] = col_t'(x * 7 + y * 13 + c);
    @(negedge clk);
    rend_done = 0;
    if (ph2) begin
      while (!pix_valid) @(negedge clk);
      check(int'(pix_x) == x && int'(pix_y) == y && int'(pix_rgb[1]) == ((x * 7 + y * 13 + 1) & 255), "pixel port");
      repeat (($urandom >> 4) % 2) @(negedge clk);
      pix_ready = 1;
      @(negedge clk);
      pix_ready = 0;
    end
  endtask

  task automatic frame(int w, int h, int dd, int nl);
    int xs[$], ys[$];
    int ngrid = 0, nred = 0, g0, r0;
    int x;
    x = 0;
    forever begin xs.push_back(x); if (x >= w - 1) break; x += dd; end
    x = 0;
    forever begin ys.push_back(x); if (x >= h - 1) break; x += dd; end
    g0 = cnt_grid_rays; r0 = cnt_reduced_pixels;
    @(negedge clk);
    img_w = 12'(w); img_h = 12'(h); d = 4'(dd); n_log2 = 2'(nl); start = 1;
    @(negedge clk);
    start = 0;
    foreach (ys[b]) foreach (xs[a]) begin
      automatic int cd = ($urandom >> 4) % 5;
      code_of[xs[a] * 4096 + ys[b]] = cd;
      do_ray(xs[a], ys[b], 0, nl, cd, 0);
      ngrid++;
    end
    for (int y = 0; y < h; y++)
      for (int xx = 0; xx < w; xx++) begin
        automatic int gx = xx / dd, gy = y / dd, fx = xx % dd, fy = y % dd;
        automatic int s, r = 0;
        automatic int c00 = code_of[gx * dd * 4096 + gy * dd];
        automatic int c10 = (fx > 0) ? code_of[(gx + 1) * dd * 4096 + gy * dd] : 0;
        automatic int c01 = (fy > 0) ? code_of[gx * dd * 4096 + (gy + 1) * dd] : 0;
        automatic int c11 = (fx > 0 && fy > 0) ? code_of[(gx + 1) * dd * 4096 + (gy + 1) * dd] : 0;
        s = (dd - fx) * (dd - fy) * (192 >> c00) + fx * (dd - fy) * (192 >> c10)
          + (dd - fx) * fy * (192 >> c01) + fx * fy * (192 >> c11);
        for (int k = 0; k < 5; k++) if ((192 >> k) * dd * dd >= s) r = k;
        if (r != 0) nred++;
        do_ray(xx, y, r, nl, 0, 1);
      end
    while (!frame_done) @(negedge clk);
    check(!busy && phase == 2'd0, "idle after the frame");
    check(int'(cnt_grid_rays) - g0 == ngrid, "grid ray count");
    check(int'(cnt_reduced_pixels) - r0 == nred, $sformatf("reduced pixels %0d expected %0d", cnt_reduced_pixels - r0, nred));
    check(nred > 0, "some pixels use fewer points");
  endtask

  initial begin
    start = 0; img_w = '0; img_h = '0; d = '0; n_log2 = '0;
    ray_req_ready = 0; ray_rsp_valid = 0; ray_delta = '0; pt_ready = 0; rend_done = 0; rend_code = '0; pix_ready = 0;
    for (int c = 0; c < 3; c++) begin ray_p0[c] = '0; ray_dp[c] = '0; rend_pixel[c] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    frame(7, 5, 3, 2);
    frame(6, 6, 2, 1);
    frame(9, 4, 4, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
