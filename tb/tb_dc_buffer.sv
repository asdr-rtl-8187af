// tb_dc_buffer: random writes at random indices and random reads on the
// three ports against an array model; clear must reset every has_color
// flag while keeping the rest.
module tb_dc_buffer;
  import asdr_pkg::*;
  logic clk = 0, rst_n = 0, clear, we, whc;
  logic [NS_W-1:0] widx, ridx [3];
  logic [7:0] wsigma, rsigma [3];
  col_t wrgb [3], rrgb [3][3];
  logic rhc [3];
  int checks = 0, failures = 0;
  int msig[192], mrgb[192][3];
  bit mhc[192];
  dc_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin
    clear = 0; we = 0; whc = 0; widx = '0; wsigma = '0;
    for (int c = 0; c < 3; c++) begin wrgb[c] = '0; ridx[c] = '0; end
    for (int i = 0; i < 192; i++) mhc[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      clear = (($urandom >> 4) % 300) == 0;
      we = ($urandom >> 4) % 2;
      widx = NS_W'(($urandom >> 4) % 192);
      wsigma = 8'($urandom); whc = ($urandom >> 9) % 2;
      for (int c = 0; c < 3; c++) begin wrgb[c] = col_t'($urandom); ridx[c] = NS_W'(($urandom >> 4) % 192); end
      #1;
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (rhc[p] != mhc[ridx[p]] || (mhc[ridx[p]] && (int'(rsigma[p]) != msig[ridx[p]]
            || int'(rrgb[p][0]) != mrgb[ridx[p]][0] || int'(rrgb[p][2]) != mrgb[ridx[p]][2]))) begin
          failures++;
          if (failures < 10) $display("port %0d idx %0d", p, ridx[p]);
        end
      end
      @(posedge clk);
      if (clear) for (int i = 0; i < 192; i++) mhc[i] = 0;
      else if (we) begin
        msig[widx] = wsigma; mhc[widx] = whc;
        for (int c = 0; c < 3; c++) mrgb[widx][c] = wrgb[c];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
