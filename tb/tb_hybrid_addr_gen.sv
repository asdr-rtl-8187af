// tb_hybrid_addr_gen: random points at every level; all 16 vertex addresses
// and the three fractions of both lanes against the reference model
// (hashed levels through the spatial hash, low-resolution levels through the
// de-hashed address with the lane number as copy ID).
module tb_hybrid_addr_gen;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic [LEVEL_W-1:0] level;
  logic [COORD_W-1:0] px [2], py [2], pz [2];
  maddr_t addr [2][8];
  logic [FRAC_W-1:0] fx [2], fy [2], fz [2];
  int checks = 0, failures = 0;
  hybrid_addr_gen dut (.level, .px, .py, .pz, .addr, .fx, .fy, .fz);
  initial begin
    for (int i = 0; i < 400; i++) begin
      level = LEVEL_W'(i % 16);
      for (int p = 0; p < 2; p++) begin
        px[p] = COORD_W'($urandom); py[p] = COORD_W'($urandom); pz[p] = COORD_W'($urandom);
      end
      #1;
      for (int p = 0; p < 2; p++) begin
        for (int v = 0; v < 8; v++) begin
          automatic int e = ref_vaddr(int'(level), int'(px[p]), int'(py[p]), int'(pz[p]), p, v);
          checks++;
          if (int'(addr[p][v]) != e) begin
            failures++;
            if (failures < 10) $display("lvl %0d lane %0d v %0d: %h vs %h", level, p, v, addr[p][v], e);
          end
        end
        checks++;
        if (int'(fx[p]) != ref_frac(int'(level), int'(px[p])) || int'(fy[p]) != ref_frac(int'(level), int'(py[p]))
            || int'(fz[p]) != ref_frac(int'(level), int'(pz[p]))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
