// tb_fusion_unit: random vertex embeddings and fractions, including the
// extreme fractions 0 and 255, against a reference trilinear interpolation
// with floor rounding.
module tb_fusion_unit;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic [ENC_LANES-1:0][ENTRY_W-1:0]   emb;
  logic [ENC_PTS-1:0][2:0][FRAC_W-1:0] frac;
  feat_t feat [ENC_PTS][FEAT_DIM];
  int checks = 0, failures = 0;
  fusion_unit dut (.*);
  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int k = 0; k < ENC_LANES; k++) emb[k] = ENTRY_W'($urandom);
      for (int p = 0; p < ENC_PTS; p++)
        for (int a = 0; a < 3; a++)
          case ($urandom % 4)
            0: frac[p][a] = 8'd0;
            1: frac[p][a] = 8'd255;
            default: frac[p][a] = FRAC_W'($urandom);
          endcase
      #1;
      for (int p = 0; p < ENC_PTS; p++) begin
        automatic int e[8];
        for (int v = 0; v < 8; v++) e[v] = int'(emb[p*8+v]);
        for (int f = 0; f < FEAT_DIM; f++) begin
          automatic int r = ref_trilinear(e, frac[p][2], frac[p][1], frac[p][0], f);
          checks++;
          if (int'(feat[p][f]) != r) begin
            failures++;
            if (failures < 10) $display("p %0d f %0d: %0d expected %0d", p, f, feat[p][f], r);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
