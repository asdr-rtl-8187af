// tb_mlp_subengine: the two sub-engine configurations, density (32-64-16,
// signed outputs and sigma) and color (16-64-64-3, hard-sigmoid outputs),
// with random weights, inputs and shifts against the reference layers and
// activation functions. Checks latency (NL*10+1 cycles to out_valid), that
// out_valid holds under back-pressure and in_ready is low while busy.
module tb_mlp_subengine;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] shift;
  logic iv_d, ir_d, ov_d, or_d, iv_c, ir_c, ov_c, or_c;
  logic signed [7:0] in_vec [MLP_MAXW];
  logic [7:0] ovec_d [16], ovec_c [16], sig_d, sig_c;
  logic wr_en_d, wr_en_c;
  logic [1:0] wr_layer;
  logic [3:0] wr_pe;
  logic [5:0] wr_row;
  logic [XBAR_N-1:0] wr_data;
  int checks = 0, failures = 0;
  mat_t wd[2], wc[3];
  mlp_subengine #(.NL(2), .D0(32), .D1(64), .D2(16), .OUT_MODE(1'b0)) dut_d (
    .clk, .rst_n, .shift, .in_valid(iv_d), .in_ready(ir_d), .in_vec, .out_valid(ov_d), .out_ready(or_d),
    .out_vec(ovec_d), .out_sigma(sig_d), .wr_en(wr_en_d), .wr_layer, .wr_pe, .wr_row, .wr_data);
  mlp_subengine #(.NL(3), .D0(16), .D1(64), .D2(64), .D3(3), .OUT_MODE(1'b1)) dut_c (
    .clk, .rst_n, .shift, .in_valid(iv_c), .in_ready(ir_c), .in_vec, .out_valid(ov_c), .out_ready(or_c),
    .out_vec(ovec_c), .out_sigma(sig_c), .wr_en(wr_en_c), .wr_layer, .wr_pe, .wr_row, .wr_data);
  always #5 clk = ~clk;

  task automatic load(bit net, int l, input mat_t w, input int nin, int nout);
    for (int p = 0; p < (8 * nout + 63) / 64; p++)
      for (int r = 0; r < 64; r++) begin
        @(negedge clk);
        wr_en_d = !net; wr_en_c = net; wr_layer = 2'(l);
        wr_pe = 4'(p); wr_row = 6'(r); wr_data = ref_pe_row(w, nin, nout, p, r);
      end
    @(negedge clk);
    wr_en_d = 0; wr_en_c = 0;
  endtask

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // run one vector through one sub-engine and compare
  task automatic run(bit net, int nin);
    vec_t xv, a;
    longint y[64];
    int lat, nl;
    nl = net ? 3 : 2;
    @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      xv[i] = (i < nin) ? int'($urandom % 256) - 128 : 0;
      in_vec[i] = 8'(int'($urandom % 256) - 128);   // lanes >= nin must be ignored
      if (i < nin) in_vec[i] = 8'(xv[i]);
    end
    shift = 4'(5 + $urandom % 4);
    if (net) iv_c = 1; else iv_d = 1;
    @(negedge clk);
    iv_c = 0; iv_d = 0;
    for (int i = 0; i < 64; i++) in_vec[i] = '0;
    lat = 1;
    while (!(net ? ov_c : ov_d)) begin
      check(!(net ? ir_c : ir_d), "in_ready low while busy");
      @(negedge clk);
      lat++;
    end
    check(lat == nl * 10 + 1, $sformatf("latency %0d", lat));
    // reference
    a = xv;
    for (int l = 0; l < nl; l++) begin
      ref_layer(net ? wc[l] : wd[l], a, l == 0 ? nin : 64, net ? (l == 2 ? 3 : 64) : (l == 1 ? 16 : 64), y);
      if (l < nl - 1) for (int i = 0; i < 64; i++) a[i] = clampi(asr(y[i], shift), 0, 127);
    end
    repeat ($urandom % 3) begin
      @(negedge clk);
      check(net ? ov_c : ov_d, "out_valid held");
    end
    if (net) begin
      for (int c = 0; c < 3; c++)
        check(int'(ovec_c[c]) == clampi(asr(y[c], shift) + 128, 0, 255), $sformatf("rgb %0d", c));
    end else begin
      check(int'(sig_d) == clampi(asr(y[0], shift), 0, 255), "sigma");
      for (int i = 0; i < 16; i++)
        check(sx8(int'(ovec_d[i])) == clampi(asr(y[i], shift), -128, 127), $sformatf("dvec %0d", i));
    end
    if (net) or_c = 1; else or_d = 1;
    @(negedge clk);
    or_c = 0; or_d = 0;
    check(net ? ir_c : ir_d, "ready again");
  endtask

  initial begin
    iv_d = 0; iv_c = 0; or_d = 0; or_c = 0; wr_en_d = 0; wr_en_c = 0; shift = 4'd6;
    wr_layer = '0; wr_pe = '0; wr_row = '0; wr_data = '0;
    for (int i = 0; i < MLP_MAXW; i++) in_vec[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 2; l++) ref_rand_mat(wd[l], 30);
    for (int l = 0; l < 3; l++) ref_rand_mat(wc[l], 30);
    load(0, 0, wd[0], 32, 64);
    load(0, 1, wd[1], 64, 16);
    load(1, 0, wc[0], 16, 64);
    load(1, 1, wc[1], 64, 64);
    load(1, 2, wc[2], 64, 3);
    for (int t = 0; t < 150; t++) begin
      run(0, 32);
      run(1, 16);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
