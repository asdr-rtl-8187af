// tb_cim_pe: writes random cell patterns and applies random input bit
// vectors of varying density; each ADC output must equal the saturated
// count of conducting cells in its column.
module tb_cim_pe;
  import asdr_pkg::*;
  logic clk = 0, wr_en = 0;
  logic [5:0] wr_row = '0;
  logic [XBAR_N-1:0] wr_data = '0, in_bits = '0;
  logic [ADC_W-1:0] adc [XBAR_N];
  logic [XBAR_N-1:0] m [XBAR_N];
  int checks = 0, failures = 0;
  cim_pe dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int pass = 0; pass < 8; pass++) begin
      for (int r = 0; r < XBAR_N; r++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 6'(r);
        for (int c = 0; c < XBAR_N; c++) wr_data[c] = ($urandom % 8) < pass + 1;
        m[r] = wr_data;
      end
      @(negedge clk) wr_en = 0;
      for (int t = 0; t < 100; t++) begin
        for (int r = 0; r < XBAR_N; r++) in_bits[r] = ($urandom % 8) < (t % 8) + 1;
        #1;
        for (int c = 0; c < XBAR_N; c++) begin
          automatic int n = 0;
          for (int r = 0; r < XBAR_N; r++) n += in_bits[r] & m[r][c];
          if (n > 31) n = 31;
          checks++;
          if (int'(adc[c]) != n) begin failures++; if (failures < 10) $display("col %0d: %0d expected %0d", c, adc[c], n); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
