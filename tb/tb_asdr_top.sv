// tb_asdr_top: end-to-end test of the whole accelerator at its full size
// (no parameter overrides: 2^20-entry embedding memory, 16 levels, 64x64
// CIM arrays, 192 points per ray, 400 x 400 sample-count table).
//
// The host side is modelled here: all embedding entries and MLP weights are
// written through the programming ports, the ray bus answers every pixel
// with a ray derived from its position, and the pixel port is drained with
// random back-pressure. A 5 x 4 image is rendered with grid pitch d = 2 and
// approximation groups of 4 points. Every pixel is compared with a
// reference computed in this file from the reference models: encoding of
// all points, density network for every point, color network for the first
// point of each group, color interpolation, five-rate compositing, the
// adaptive choice at the grid pixels and the bilinear count interpolation.
// Each mechanism of the design is counted and must occur at least once:
// register-cache hits, crossbar conflicts, color-network runs and bypasses,
// approximated points, grid rays of phase I, the switch to phase II and
// pixels rendered with fewer points.
module tb_asdr_top;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  localparam int W = 5, H = 4, D = 2, NL = 2, SD = 7, SC = 7, THR = 1200;
  logic clk = 0, rst_n = 0;
  logic start, busy, frame_done;
  logic [1:0] phase;
  logic ray_req_valid, ray_req_ready, ray_rsp_valid, ray_rsp_ready;
  logic [11:0] ray_req_x, ray_req_y, pix_x, pix_y;
  logic [COORD_W-1:0] ray_p0 [3], ray_dp [3];
  logic [7:0] ray_delta;
  logic pix_valid, pix_ready;
  col_t pix_rgb [3];
  logic tbl_we;
  maddr_t tbl_waddr;
  logic [ENTRY_W-1:0] tbl_wdata;
  logic w_en, w_net;
  logic [1:0] w_layer;
  logic [3:0] w_pe;
  logic [5:0] w_row;
  logic [XBAR_N-1:0] w_data;
  logic [31:0] cnt_cache_hits, cnt_xbar_reads, cnt_conflict_cycles, cnt_color_mlp,
               cnt_color_bypass, cnt_approx, cnt_grid_rays, cnt_reduced_pixels;
  int checks = 0, failures = 0;
  mat_t   wm [5];
  wset_t  wb;
  int exp_pix [H][W][3];
  int grid_code [8][8];
  int n_grid = 0, n_red = 0, n_apx = 0, n_col = 0, n_byp = 0;
  bit saw_phase2 = 0;

  asdr_top dut (
    .clk, .rst_n, .start, .busy, .frame_done, .phase,
    .cfg_img_w(12'(W)), .cfg_img_h(12'(H)), .cfg_d(4'(D)), .cfg_n_log2(2'(NL)),
    .cfg_thr(16'(THR)), .cfg_shift_d(4'(SD)), .cfg_shift_c(4'(SC)),
    .ray_req_valid, .ray_req_ready, .ray_req_x, .ray_req_y,
    .ray_rsp_valid, .ray_rsp_ready, .ray_p0, .ray_dp, .ray_delta,
    .pix_valid, .pix_ready, .pix_x, .pix_y, .pix_rgb,
    .tbl_we, .tbl_waddr, .tbl_wdata,
    .w_en, .w_net, .w_layer, .w_pe, .w_row, .w_data,
    .cnt_cache_hits, .cnt_xbar_reads, .cnt_conflict_cycles, .cnt_color_mlp,
    .cnt_color_bypass, .cnt_approx, .cnt_grid_rays, .cnt_reduced_pixels
  );
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // the ray of pixel (x, y)
  function automatic int p0_of(int x, int y, int c);
    return (x * 5003 + y * 11311 + c * 21001 + 777) & 16'hFFFF;
  endfunction
  function automatic int dp_of(int x, int y, int c);
    return 90 + 13 * c + ((x + 2 * y) % 5);
  endfunction
  function automatic int delta_of(int x, int y);
    return 3 + (x + y) % 3;
  endfunction

  // reference rendering of one ray with stride code r
  function automatic void ref_ray(int x, int y, int r, output int pix[3], output int code);
    int m = 192 >> r, n = 1 << NL;
    int sig[256], rgbm[256][3], full[256][3];
    int colr[5][3];
    for (int j = 0; j < m; j++) begin
      int f[32];
      vec_t fv;
      int s, c3[3];
      int pos[3];
      for (int c = 0; c < 3; c++) pos[c] = (p0_of(x, y, c) + (j << r) * dp_of(x, y, c)) & 16'hFFFF;
      ref_encode(pos[0], pos[1], pos[2], j % 2, f);
      for (int i = 0; i < 64; i++) fv[i] = (i < 32) ? f[i] : 0;
      ref_mlp_fast(wb, fv, SD, SC, j % n == 0, s, c3);
      sig[j] = s;
      for (int c = 0; c < 3; c++) rgbm[j][c] = c3[c];
      if (j % n == 0) n_col++; else n_byp++;
    end
    for (int j = 0; j < m; j++) begin
      int ga = j & ~(n - 1), gb = (j & ~(n - 1)) + n;
      for (int c = 0; c < 3; c++)
        full[j][c] = (j % n == 0) ? rgbm[j][c] : ref_approx(rgbm[ga][c], gb < m ? rgbm[gb][c] : 0, gb < m, j - ga, NL);
      if (j % n != 0) n_apx++;
    end
    ref_render(m, sig, full, delta_of(x, y) << r, colr);
    for (int c = 0; c < 3; c++) pix[c] = colr[0][c] >> 8;
    code = ref_pick(colr, THR);
  endfunction

  task automatic load(int net, int l, int nin, int nout);
    for (int p = 0; p < (8 * nout + 63) / 64; p++)
      for (int r = 0; r < 64; r++) begin
        @(negedge clk);
        w_en = 1; w_net = net[0]; w_layer = 2'(l);
        w_pe = 4'(p); w_row = 6'(r); w_data = ref_pe_row(wm[net * 2 + l], nin, nout, p, r);
      end
    @(negedge clk);
    w_en = 0;
  endtask

  // reference of the whole frame: the grid rays first (their codes decide
  // the counts of the pixels), then every pixel; one ref_ray call site
  task automatic reference();
    int xs[$], ys[$], v, cd, pix[3];
    int jx[$], jy[$];
    v = 0; forever begin xs.push_back(v); if (v >= W - 1) break; v += D; end
    v = 0; forever begin ys.push_back(v); if (v >= H - 1) break; v += D; end
    foreach (ys[b]) foreach (xs[a]) begin jx.push_back(xs[a]); jy.push_back(ys[b]); end
    n_grid = jx.size();
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin jx.push_back(x); jy.push_back(y); end
    foreach (jx[i]) begin
      int x = jx[i], y = jy[i], r = 0;
      if (i >= n_grid) begin
        int gx = x / D, gy = y / D, fx = x % D, fy = y % D, s;
        s = (D - fx) * (D - fy) * (192 >> grid_code[gy][gx])
          + fx * (D - fy) * (fx ? (192 >> grid_code[gy][gx + 1]) : 0)
          + (D - fx) * fy * (fy ? (192 >> grid_code[gy + 1][gx]) : 0)
          + fx * fy * ((fx && fy) ? (192 >> grid_code[gy + 1][gx + 1]) : 0);
        for (int k = 0; k < 5; k++) if ((192 >> k) * D * D >= s) r = k;
        if (r != 0) n_red++;
      end
      ref_ray(x, y, r, pix, cd);
      if (i < n_grid) grid_code[y / D][x / D] = cd;
      else for (int c = 0; c < 3; c++) exp_pix[y][x][c] = pix[c];
    end
  endtask

  // ray bus model
  initial begin
    ray_req_ready = 0; ray_rsp_valid = 0; ray_delta = '0;
    for (int c = 0; c < 3; c++) begin ray_p0[c] = '0; ray_dp[c] = '0; end
    forever begin
      int x, y;
      @(negedge clk);
      if (ray_req_valid) begin
        x = ray_req_x; y = ray_req_y;
        ray_req_ready = 1;
        @(negedge clk);
        ray_req_ready = 0;
        repeat (($urandom >> 4) % 3) @(negedge clk);
        ray_rsp_valid = 1;
        for (int c = 0; c < 3; c++) begin ray_p0[c] = COORD_W'(p0_of(x, y, c)); ray_dp[c] = COORD_W'(dp_of(x, y, c)); end
        ray_delta = 8'(delta_of(x, y));
        #1;
        while (!ray_rsp_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        ray_rsp_valid = 0;
      end
    end
  end

  always @(posedge clk) if (phase == 2'd2) saw_phase2 <= 1'b1;

  initial begin
    int npix = 0;
    int hist[5];
    start = 0; pix_ready = 0; tbl_we = 0; tbl_waddr = '0; tbl_wdata = '0;
    w_en = 0; w_net = 0; w_layer = '0; w_pe = '0; w_row = '0; w_data = '0;
    for (int i = 0; i < 5; i++) begin
      ref_rand_mat(wm[i], 40);
      ref_wbits(wm[i], (i == 0) ? 32 : (i == 2) ? 16 : 64, wb[i]);
    end
    reference();
    foreach (grid_code[b, a]) if (b < 3 && a < 3) hist[grid_code[b][a]]++;
    $display("reference grid codes: %0d %0d %0d %0d %0d, reduced pixels %0d", hist[0], hist[1], hist[2], hist[3], hist[4], n_red);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // embedding tables: every entry of the 2 MB memory
    for (int a = 0; a < (1 << MEM_AW); a++) begin
      @(negedge clk);
      tbl_we = 1; tbl_waddr = maddr_t'(a); tbl_wdata = ENTRY_W'(ref_entry(a));
    end
    @(negedge clk) tbl_we = 0;
    load(0, 0, 32, 64); load(0, 1, 64, 16);
    load(1, 0, 16, 64); load(1, 1, 64, 64); load(1, 2, 64, 3);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!frame_done) begin
      pix_ready = (($urandom >> 4) % 3) != 0;
      #1;
      if (pix_valid && pix_ready) begin
        automatic int x = pix_x, y = pix_y;
        checks++;
        if (x >= W || y >= H || pix_rgb[0] != col_t'(exp_pix[y][x][0]) || pix_rgb[1] != col_t'(exp_pix[y][x][1])
            || pix_rgb[2] != col_t'(exp_pix[y][x][2])) begin
          failures++;
          $display("pixel (%0d,%0d): %0d %0d %0d expected %0d %0d %0d", x, y, pix_rgb[0], pix_rgb[1], pix_rgb[2],
                   exp_pix[y][x][0], exp_pix[y][x][1], exp_pix[y][x][2]);
        end
        npix++;
      end
      @(negedge clk);
    end
    check(npix == W * H, $sformatf("%0d pixels out", npix));
    check(int'(cnt_grid_rays) == n_grid && n_grid > 0, $sformatf("grid rays %0d expected %0d", cnt_grid_rays, n_grid));
    check(saw_phase2, "switch to the rendering phase");
    check(int'(cnt_reduced_pixels) == n_red && n_red > 0, $sformatf("reduced pixels %0d expected %0d", cnt_reduced_pixels, n_red));
    check(int'(cnt_color_mlp) == n_col && n_col > 0, $sformatf("color runs %0d expected %0d", cnt_color_mlp, n_col));
    check(int'(cnt_color_bypass) == n_byp && n_byp > 0, $sformatf("color bypasses %0d expected %0d", cnt_color_bypass, n_byp));
    check(int'(cnt_approx) == n_apx && n_apx > 0, $sformatf("approximated points %0d expected %0d", cnt_approx, n_apx));
    check(cnt_cache_hits > 0, "register-cache hits");
    check(cnt_conflict_cycles > 0, "crossbar conflicts");
    check(cnt_xbar_reads > 0, "crossbar reads");
    $display("hits %0d reads %0d conflicts %0d color %0d bypass %0d approx %0d grid %0d reduced %0d",
             cnt_cache_hits, cnt_xbar_reads, cnt_conflict_cycles, cnt_color_mlp, cnt_color_bypass,
             cnt_approx, cnt_grid_rays, cnt_reduced_pixels);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (3000000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
