// tb_lowres_unit: the de-hashed address. Checks the worked example of the
// design (vertices (6,10,4), (6,11,4), (6,10,3), (6,11,3) of a 16^3 grid go
// to crossbars 40, 44, 43, 47), random coordinates against a bit-loop
// reference, and that the eight vertices of any voxel use eight different
// crossbars.
module tb_lowres_unit;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic [GRID_W-1:0] x, y, z;
  logic [3:0] cb;
  logic [T_LOG2-1:0] copy_id, addr;
  int checks = 0, failures = 0;
  lowres_unit dut (.x, .y, .z, .cb, .copy_id, .addr);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int ex[4][4] = '{'{6,10,4,40}, '{6,11,4,44}, '{6,10,3,43}, '{6,11,3,47}};
    cb = 4; copy_id = 0;
    foreach (ex[i]) begin
      x = GRID_W'(ex[i][0]); y = GRID_W'(ex[i][1]); z = GRID_W'(ex[i][2]);
      #1 chk(int'(addr) >> 6, ex[i][3], "worked example xbar");
    end
    for (int i = 0; i < 400; i++) begin
      automatic int c = 2 + $urandom % 4;
      cb = 4'(c);
      x = GRID_W'($urandom % (1 << c)); y = GRID_W'($urandom % (1 << c)); z = GRID_W'($urandom % (1 << c));
      copy_id = T_LOG2'($urandom);
      #1 chk(int'(addr), ref_lowres(int'(x), int'(y), int'(z), c, int'(copy_id)), "address");
    end
    // eight vertices of a voxel -> eight crossbars (addr >> 6)
    for (int i = 0; i < 100; i++) begin
      automatic int bx = $urandom % 15, by = $urandom % 15, bz = $urandom % 15;
      automatic int seen[int];
      cb = 4; copy_id = 0;
      for (int v = 0; v < 8; v++) begin
        x = GRID_W'(bx + (v >> 2)); y = GRID_W'(by + ((v >> 1) & 1)); z = GRID_W'(bz + (v & 1));
        #1 seen[int'(addr) >> 6] = 1;
      end
      chk(seen.num(), 8, "distinct crossbars of a voxel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
