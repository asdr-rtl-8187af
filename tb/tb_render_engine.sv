// tb_render_engine: random rays of random length and approximation group
// size; MLP results are written in random order with gaps, with colors only
// for the first point of each group. The pixel, the five renders and the
// sample-count code are compared with the reference (approximation of the
// missing colors, then compositing and the adaptive choice), and the
// approximation counter with the number of interpolated points.
module tb_render_engine;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic clk = 0, rst_n = 0, ray_begin, pt_we, pt_hc, done;
  logic [NS_W-1:0] ray_m, pt_idx;
  logic [1:0] ray_n_log2;
  logic [11:0] ray_delta;
  logic [COLACC_W-1:0] thr, col [NUM_NS][3];
  logic [7:0] pt_sigma;
  col_t pt_rgb [3], pixel [3];
  logic [CODE_W-1:0] code;
  logic [31:0] cnt_approx;
  int checks = 0, failures = 0;
  int sig[256], rgb[256][3], full[256][3];
  int napx = 0;
  render_engine dut (.*);
  always #5 clk = ~clk;
  initial begin
    ray_begin = 0; pt_we = 0; pt_hc = 0; ray_m = '0; pt_idx = '0; ray_n_log2 = '0;
    ray_delta = '0; thr = '0; pt_sigma = '0;
    for (int c = 0; c < 3; c++) pt_rgb[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 80; t++) begin
      automatic int m = (t % 4 == 0) ? 192 : (t % 4 == 1) ? 12 : 1 + ($urandom >> 4) % 192;
      automatic int nl = ($urandom >> 4) % 3;
      automatic int n = 1 << nl;
      automatic int dl = 4 + ($urandom >> 4) % 200;
      automatic int order[$];
      automatic int colr[5][3];
      automatic int cd;
      thr = COLACC_W'(($urandom >> 4) % 128);
      for (int j = 0; j < m; j++) begin
        sig[j] = ($urandom >> 4) % 60;
        for (int c = 0; c < 3; c++) rgb[j][c] = ($urandom >> 4) % 256;
        order.push_back(j);
      end
      order.shuffle();
      // colors the renderer should use
      for (int j = 0; j < m; j++) begin
        automatic int ga = j & ~(n - 1);
        automatic int gb = ga + n;
        for (int c = 0; c < 3; c++)
          full[j][c] = (j % n == 0) ? rgb[j][c] : ref_approx(rgb[ga][c], gb < m ? rgb[gb][c] : 0, gb < m, j - ga, nl);
        if (j % n != 0) napx++;
      end
      @(negedge clk);
      ray_begin = 1; ray_m = NS_W'(m); ray_n_log2 = 2'(nl); ray_delta = 12'(dl);
      @(negedge clk);
      ray_begin = 0;
      foreach (order[i]) begin
        automatic int j = order[i];
        while (($urandom >> 4) % 4 == 0) begin pt_we = 0; @(negedge clk); end
        pt_we = 1; pt_idx = NS_W'(j); pt_sigma = 8'(sig[j]); pt_hc = (j % n) == 0;
        for (int c = 0; c < 3; c++) pt_rgb[c] = (j % n == 0) ? col_t'(rgb[j][c]) : col_t'($urandom);
        @(negedge clk);
      end
      pt_we = 0;
      ref_render(m, sig, full, dl, colr);
      cd = ref_pick(colr, int'(thr));
      while (!done) @(negedge clk);
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (int'(pixel[c]) != (colr[0][c] >> 8)) begin failures++; if (failures < 10) $display("ray %0d pixel %0d: %0d expected %0d", t, c, pixel[c], colr[0][c] >> 8); end
        for (int r = 0; r < 5; r++) begin
          checks++;
          if (int'(col[r][c]) != colr[r][c]) failures++;
        end
      end
      checks++;
      if (int'(code) != cd) begin failures++; $display("ray %0d code %0d expected %0d", t, code, cd); end
    end
    checks++;
    if (int'(cnt_approx) != napx) begin failures++; $display("approx count %0d expected %0d", cnt_approx, napx); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
