// tb_hash_unit: random vertices through the hash unit, compared with the
// spatial hash computed in 64-bit integer arithmetic.
module tb_hash_unit;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic [GRID_W-1:0] x, y, z;
  logic [T_LOG2-1:0] idx;
  int checks = 0, failures = 0;
  hash_unit dut (.x, .y, .z, .index(idx));
  initial begin
    for (int i = 0; i < 500; i++) begin
      x = GRID_W'($urandom); y = GRID_W'($urandom); z = GRID_W'($urandom);
      if (i == 0) begin x = 0; y = 0; z = 0; end
      #1;
      checks++;
      if (int'(idx) != ref_hash(int'(x), int'(y), int'(z))) begin
        failures++;
        $display("hash(%0d,%0d,%0d) = %h, expected %h", x, y, z, idx, ref_hash(int'(x), int'(y), int'(z)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
