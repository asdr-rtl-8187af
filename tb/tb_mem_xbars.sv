// tb_mem_xbars: writes random entries over the whole 2^20-entry address
// range and reads them back through all 16 ports at once, each port in a
// different crossbar (the rule the lookup scheduler keeps).
module tb_mem_xbars;
  import asdr_pkg::*;
  localparam int NP = ENC_LANES;
  logic clk = 0;
  logic we;
  logic [MEM_AW-1:0] waddr;
  logic [ENTRY_W-1:0] wdata;
  logic [NP-1:0] re;
  logic [MEM_AW-1:0] raddr [NP];
  logic [ENTRY_W-1:0] rdata [NP];
  int checks = 0, failures = 0;
  int model[int];
  int addrs[$];
  mem_xbars dut (.*);
  always #5 clk = ~clk;
  initial begin
    we = 0; waddr = '0; wdata = '0; re = '0;
    for (int k = 0; k < NP; k++) raddr[k] = MEM_AW'(k << XBAR_ROWS_LOG2);
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      we = 1;
      waddr = MEM_AW'(((i % 16) << XBAR_ROWS_LOG2) | ($urandom & ~((16 << XBAR_ROWS_LOG2) - 1)) | ($urandom % 64));
      wdata = ENTRY_W'($urandom);
      model[int'(waddr)] = int'(wdata);
      addrs.push_back(int'(waddr));
    end
    @(negedge clk) we = 0;
    // read in groups of 16 entries whose crossbar numbers differ (i % 16)
    for (int g = 0; g + NP <= addrs.size(); g += NP) begin
      @(negedge clk);
      re = '1;
      for (int k = 0; k < NP; k++) raddr[k] = MEM_AW'(addrs[g + k]);
      #1;
      for (int k = 0; k < NP; k++) begin
        checks++;
        if (int'(rdata[k]) != model[addrs[g + k]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
