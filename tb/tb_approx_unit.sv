// tb_approx_unit: exhaustive group positions and group sizes 1, 2, 4 with
// random end colors (rising, falling and equal), with and without a valid
// end point, against the reference linear interpolation (floor rounding).
module tb_approx_unit;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  col_t c_a [3], c_b [3], c [3];
  logic b_valid;
  logic [2:0] k;
  logic [1:0] n_log2;
  int checks = 0, failures = 0;
  approx_unit dut (.*);
  initial begin
    for (int t = 0; t < 2000; t++)
      for (int nl = 0; nl < 3; nl++)
        for (int kk = 0; kk < (1 << nl); kk++) begin
          for (int ch = 0; ch < 3; ch++) begin c_a[ch] = col_t'($urandom); c_b[ch] = (t % 7 == 0) ? c_a[ch] : col_t'($urandom >> 8); end
          b_valid = (t % 5) != 0;
          k = 3'(kk); n_log2 = 2'(nl);
          #1;
          for (int ch = 0; ch < 3; ch++) begin
            automatic int r = ref_approx(c_a[ch], c_b[ch], b_valid, kk, nl);
            checks++;
            if (int'(c[ch]) != r) begin failures++; if (failures < 10) $display("a %0d b %0d k %0d n %0d: %0d expected %0d", c_a[ch], c_b[ch], kk, nl, c[ch], r); end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
