// tb_cim_layer: a 64 -> 64 and a 16 -> 3 layer with random int8 weights and
// inputs of different magnitudes (small ones stay in the ADC range, large
// ones saturate it) against the reference bit-sliced layer model. Also
// checks the timing: done exactly 9 cycles after start, busy meanwhile.
module tb_cim_layer;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start;
  logic signed [7:0] x [MLP_MAXW];
  logic busy_a, done_a, busy_b, done_b;
  logic signed [ACC_W-1:0] y_a [MLP_MAXW], y_b [MLP_MAXW];
  logic wr_en_a, wr_en_b;
  logic [3:0] wr_pe;
  logic [5:0] wr_row;
  logic [XBAR_N-1:0] wr_data;
  int checks = 0, failures = 0;
  mat_t wa, wb;
  vec_t xv;
  cim_layer #(.IN(64), .OUT(64)) dut_a (.clk, .rst_n, .start, .x, .busy(busy_a), .done(done_a), .y(y_a),
    .wr_en(wr_en_a), .wr_pe, .wr_row, .wr_data);
  cim_layer #(.IN(16), .OUT(3)) dut_b (.clk, .rst_n, .start, .x, .busy(busy_b), .done(done_b), .y(y_b),
    .wr_en(wr_en_b), .wr_pe, .wr_row, .wr_data);
  always #5 clk = ~clk;

  task automatic load(bit which, input mat_t w, input int nin, int nout);
    for (int p = 0; p < (8 * nout + 63) / 64; p++)
      for (int r = 0; r < 64; r++) begin
        @(negedge clk);
        wr_en_a = !which; wr_en_b = which;
        wr_pe = 4'(p); wr_row = 6'(r); wr_data = ref_pe_row(w, nin, nout, p, r);
      end
    @(negedge clk);
    wr_en_a = 0; wr_en_b = 0;
  endtask

  initial begin
    start = 0; wr_en_a = 0; wr_en_b = 0; wr_pe = '0; wr_row = '0; wr_data = '0;
    for (int i = 0; i < MLP_MAXW; i++) x[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 4; pass++) begin
      automatic int mag = (pass == 0) ? 3 : (pass == 1) ? 20 : 127;
      ref_rand_mat(wa, mag);
      ref_rand_mat(wb, mag);
      load(0, wa, 64, 64);
      load(1, wb, 16, 3);
      for (int t = 0; t < 40; t++) begin
        automatic int cyc = 0;
        automatic longint ya[64], yb[64];
        @(negedge clk);
        for (int i = 0; i < 64; i++) begin
          xv[i] = int'($urandom % (2 * mag + 1)) - mag;
          x[i] = 8'(xv[i]);
        end
        start = 1;
        @(negedge clk);
        start = 0;
        cyc = 1;
        while (!done_a) begin
          checks++;
          if (!busy_a) begin failures++; $display("busy low while computing"); end
          @(negedge clk);
          cyc++;
        end
        checks++;
        if (cyc != 9 || !done_b) begin failures++; $display("done after %0d cycles", cyc); end
        ref_layer(wa, xv, 64, 64, ya);
        ref_layer(wb, xv, 16, 3, yb);
        for (int o = 0; o < 64; o++) begin
          checks++;
          if (longint'(y_a[o]) != ya[o]) begin failures++; if (failures < 10) $display("a o %0d: %0d expected %0d", o, y_a[o], ya[o]); end
          checks++;
          if (longint'(y_b[o]) != yb[o]) begin failures++; if (failures < 10) $display("b o %0d: %0d expected %0d", o, y_b[o], yb[o]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
