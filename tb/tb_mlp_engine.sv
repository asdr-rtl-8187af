// tb_mlp_engine: random encoded points with random need_color flags
// through the density network and (when asked) the color network, against
// the reference MLP. Points without need_color must bypass the color
// sub-engine (has_color = 0, shorter latency) and the counters must match
// the number of points on each path.
module tb_mlp_engine;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] shift_d, shift_c;
  logic in_valid, in_ready, out_valid, out_ready, out_has_color;
  feat_t in_feat [ENC_W];
  ptag_t in_tag, out_tag;
  logic [7:0] out_sigma;
  col_t out_rgb [3];
  logic wr_en, wr_net;
  logic [1:0] wr_layer;
  logic [3:0] wr_pe;
  logic [5:0] wr_row;
  logic [XBAR_N-1:0] wr_data;
  logic [31:0] cnt_color, cnt_bypass;
  int checks = 0, failures = 0;
  mat_t wd0, wd1, wc0, wc1, wc2;
  mlp_engine dut (.*);
  always #5 clk = ~clk;

  task automatic load(bit net, int l, input mat_t w, input int nin, int nout);
    for (int p = 0; p < (8 * nout + 63) / 64; p++)
      for (int r = 0; r < 64; r++) begin
        @(negedge clk);
        wr_en = 1; wr_net = net; wr_layer = 2'(l);
        wr_pe = 4'(p); wr_row = 6'(r); wr_data = ref_pe_row(w, nin, nout, p, r);
      end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    int ncol = 0, nbyp = 0;
    wr_en = 0; wr_net = 0; wr_layer = '0; wr_pe = '0; wr_row = '0; wr_data = '0;
    in_valid = 0; out_ready = 0; in_tag = '0; shift_d = 4'd6; shift_c = 4'd7;
    for (int i = 0; i < ENC_W; i++) in_feat[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_rand_mat(wd0, 40); ref_rand_mat(wd1, 40);
    ref_rand_mat(wc0, 40); ref_rand_mat(wc1, 40); ref_rand_mat(wc2, 40);
    load(0, 0, wd0, 32, 64); load(0, 1, wd1, 64, 16);
    load(1, 0, wc0, 16, 64); load(1, 1, wc1, 64, 64); load(1, 2, wc2, 64, 3);
    for (int t = 0; t < 200; t++) begin
      automatic vec_t f;
      automatic int sig, rgb[3], lat;
      automatic bit nc = (($urandom >> 12) % 3) == 0;
      for (int i = 0; i < 64; i++) f[i] = (i < 32) ? int'($urandom % 256) - 128 : 0;
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < ENC_W; i++) in_feat[i] = 8'(f[i]);
      in_tag.idx = NS_W'(t);
      in_tag.need_color = nc;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 in_valid = 0;
      lat = 0;
      while (!out_valid) begin @(negedge clk); lat++; end
      ref_mlp(wd0, wd1, wc0, wc1, wc2, f, 6, 7, sig, rgb);
      check(out_tag.idx == NS_W'(t) && out_has_color == nc, "tag / has_color");
      check(int'(out_sigma) == sig, $sformatf("sigma %0d expected %0d", out_sigma, sig));
      if (nc) begin
        ncol++;
        for (int c = 0; c < 3; c++) check(int'(out_rgb[c]) == rgb[c], $sformatf("rgb %0d: %0d expected %0d", c, out_rgb[c], rgb[c]));
        check(lat > 40, $sformatf("color latency %0d", lat));
      end else begin
        nbyp++;
        check(lat < 30, $sformatf("bypass latency %0d", lat));
      end
      repeat ($urandom % 3) @(negedge clk);
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
    end
    check(int'(cnt_color) == ncol && int'(cnt_bypass) == nbyp, "counters");
    check(ncol > 0 && nbyp > 0, "both paths exercised");
    $display("color %0d bypass %0d", cnt_color, cnt_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
