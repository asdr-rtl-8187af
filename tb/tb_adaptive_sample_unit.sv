// tb_adaptive_sample_unit: random render sets, built so that the distances
// between render 0 and renders 1..4 fall on both sides of the threshold,
// against the reference choice (largest i with distance <= threshold).
// Also checks the one-cycle registered output timing.
module tb_adaptive_sample_unit;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid, out_valid;
  logic [COLACC_W-1:0] col [NUM_NS][3], thr, rd [NUM_NS];
  logic [CODE_W-1:0] code;
  int checks = 0, failures = 0;
  int hist[5];
  adaptive_sample_unit dut (.*);
  always #5 clk = ~clk;
  initial begin
    in_valid = 0; thr = '0;
    for (int r = 0; r < NUM_NS; r++) for (int c = 0; c < 3; c++) col[r][c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      automatic int cm[5][3];
      automatic int e;
      @(negedge clk);
      thr = COLACC_W'(($urandom >> 4) % 64);
      for (int c = 0; c < 3; c++) begin
        cm[0][c] = 1000 + ($urandom >> 4) % 60000;
        col[0][c] = COLACC_W'(cm[0][c]);
      end
      for (int r = 1; r < 5; r++)
        for (int c = 0; c < 3; c++) begin
          cm[r][c] = cm[0][c] + int'(($urandom >> 4) % (r * 24 + 1)) - r * 12;
          col[r][c] = COLACC_W'(cm[r][c]);
        end
      in_valid = 1;
      e = ref_pick(cm, int'(thr));
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || int'(code) != e) begin
        failures++;
        if (failures < 10) $display("code %0d expected %0d (valid %0b)", code, e, out_valid);
      end
      hist[e]++;
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (hist[i] == 0) begin failures++; $display("code %0d never chosen", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
