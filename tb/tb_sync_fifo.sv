// tb_sync_fifo: random pushes and pops against a queue model; checks order,
// full/empty flags and that a full FIFO refuses writes.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic wr_valid, wr_ready, rd_valid, rd_ready;
  logic [15:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  logic [15:0] q[$];
  sync_fifo #(.W(16), .DEPTH(4)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      wr_valid = ($urandom % 3) != 0;
      rd_ready = ($urandom % 2) != 0;
      wr_data  = 16'($urandom);
      #1;
      checks++;
      if (rd_valid != (q.size() != 0) || wr_ready != (q.size() < 4)) begin
        failures++;
        $display("flags wrong: size %0d rd_valid %0b wr_ready %0b", q.size(), rd_valid, wr_ready);
      end
      if (rd_valid && rd_ready) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("data %h expected %h", rd_data, q[0]); end
      end
      @(posedge clk);
      if (rd_valid && rd_ready) void'(q.pop_front());
      if (wr_valid && wr_ready) q.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
