// tb_reg_cache: random lookups and inserts on a small address space against
// a most-recent-first list model of an 8-entry LRU cache; checks hit flags,
// hit data, LRU eviction order and flush.
module tb_reg_cache;
  import asdr_pkg::*;
  localparam int E = 8, NL = 16, NI = 16;
  logic clk = 0, rst_n = 0, flush = 0;
  logic [NL-1:0] look_en, hit;
  maddr_t look_addr [NL];
  logic [ENTRY_W-1:0] hit_data [NL];
  logic [NI-1:0] ins_en;
  maddr_t ins_addr [NI];
  logic [ENTRY_W-1:0] ins_data [NI];
  int checks = 0, failures = 0;
  int lst[$];            // addresses, most recent first
  int val[int];
  reg_cache #(.ENTRIES(E), .NLOOK(NL), .NINS(NI)) dut (.*);
  always #5 clk = ~clk;

  function automatic int find(int a);
    foreach (lst[i]) if (lst[i] == a) return i;
    return -1;
  endfunction

  initial begin
    look_en = '0; ins_en = '0;
    for (int k = 0; k < NL; k++) look_addr[k] = '0;
    for (int k = 0; k < NI; k++) begin ins_addr[k] = '0; ins_data[k] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      for (int k = 0; k < NL; k++) begin
        look_en[k] = $urandom % 2;
        look_addr[k] = maddr_t'($urandom % 20);
      end
      for (int k = 0; k < NI; k++) begin
        ins_en[k] = ($urandom % 3) == 0;
        ins_addr[k] = maddr_t'($urandom % 20);
        ins_data[k] = ENTRY_W'($urandom);
      end
      flush = ($urandom % 200) == 0;
      #1;
      for (int k = 0; k < NL; k++) begin
        automatic int p = find(int'(look_addr[k]));
        checks++;
        if (hit[k] != (p >= 0) || (p >= 0 && int'(hit_data[k]) != val[int'(look_addr[k])])) begin
          failures++;
          if (failures < 10) $display("it %0d lane %0d addr %0d: hit %0b expected %0b", it, k, look_addr[k], hit[k], p >= 0);
        end
      end
      // model update: hits first, then inserts
      if (flush) lst.delete();
      else begin
        for (int k = 0; k < NL; k++) begin
          automatic int p = find(int'(look_addr[k]));
          if (look_en[k] && p >= 0) begin lst.delete(p); lst.push_front(int'(look_addr[k])); end
        end
        for (int k = 0; k < NI; k++) if (ins_en[k]) begin
          automatic int p = find(int'(ins_addr[k]));
          if (p >= 0) lst.delete(p);
          else if (lst.size() == E) void'(lst.pop_back());
          lst.push_front(int'(ins_addr[k]));
          val[int'(ins_addr[k])] = int'(ins_data[k]);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
