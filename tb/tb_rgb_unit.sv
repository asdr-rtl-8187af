// tb_rgb_unit: random rays (length, densities from transparent to opaque,
// colors, point spacing) composited one point per cycle; all five renders
// (every 1st, 2nd, 4th, 8th and 16th point) and the pixel are compared with
// the reference renderer. A separate sweep checks exp(-x) against the
// reference approximation and its distance (at most about 1% of full
// scale) from the real exp.
module tb_rgb_unit;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic clk = 0, rst_n = 0, start, pt_valid;
  logic [11:0] delta_in;
  logic [NS_W-1:0] pt_idx;
  logic [7:0] pt_sigma;
  col_t pt_rgb [3], pixel [3];
  logic [COLACC_W-1:0] col [NUM_NS][3];
  int checks = 0, failures = 0;
  int sig[256], rgb[256][3];
  rgb_unit dut (.*);
  always #5 clk = ~clk;
  initial begin
    start = 0; pt_valid = 0; delta_in = '0; pt_idx = '0; pt_sigma = '0;
    for (int c = 0; c < 3; c++) pt_rgb[c] = '0;
    // exp check: within about 1% of 65536 * exp(-x)
    for (int s = 0; s < 256; s += 3)
      for (int d = 1; d < 4096; d += 97) begin
        automatic longint e = ref_exp(s, d);
        automatic real ex = 65536.0 * $exp(-(real'(s) * real'(d)) / 256.0);
        checks++;
        if (int'(dut.exp_neg(8'(s), 16'(d))) != int'(e) || (e - ex > 700.0) || (ex - e > 700.0)) begin
          failures++; $display("exp s %0d d %0d: %0d ref %0d real %f", s, d, dut.exp_neg(8'(s), 16'(d)), e, ex);
        end
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int m = (t % 3 == 0) ? 192 : 1 + ($urandom >> 4) % 192;
      automatic int dl = 1 + ($urandom >> 4) % ((t % 2) ? 64 : 1024);
      automatic int smax = (t % 4 == 0) ? 255 : 40;
      automatic int colr[5][3];
      for (int j = 0; j < m; j++) begin
        sig[j] = ($urandom >> 4) % (smax + 1);
        for (int c = 0; c < 3; c++) rgb[j][c] = ($urandom >> 4) % 256;
      end
      @(negedge clk);
      start = 1; delta_in = 12'(dl);
      @(negedge clk);
      start = 0;
      for (int j = 0; j < m; j++) begin
        pt_valid = 1; pt_idx = NS_W'(j); pt_sigma = 8'(sig[j]);
        for (int c = 0; c < 3; c++) pt_rgb[c] = col_t'(rgb[j][c]);
        @(negedge clk);
      end
      pt_valid = 0;
      ref_render(m, sig, rgb, dl, colr);
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (int'(col[r][c]) != colr[r][c]) begin failures++; if (failures < 10) $display("ray %0d r %0d c %0d: %0d expected %0d", t, r, c, col[r][c], colr[r][c]); end
        end
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (int'(pixel[c]) != (colr[0][c] >> 8)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
