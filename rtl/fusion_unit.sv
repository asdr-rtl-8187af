// fusion_unit: trilinear interpolation of the eight vertex embeddings of a
// voxel, for ENC_PTS points at one level.
//
// With per-axis fractions fx, fy, fz (Q0.8) the weight of vertex v
// (dx = v[2], dy = v[1], dz = v[0]) is
//   w_v = (dx ? fx : 256-fx) * (dy ? fy : 256-fy) * (dz ? fz : 256-fz)
// (Q0.24, the eight weights sum to 2^24) and each output feature is
//   f = floor( sum_v w_v * e_v / 2^24 )     (int8)
// computed with multipliers and an accumulation (adder) tree. The fused
// per-level features are concatenated over the levels by the encoding
// engine. Combinational. The weighting scheme follows the design; the fixed
// point formats are this implementation's choice.
module fusion_unit
  import asdr_pkg::*;
(
  input  logic [ENC_LANES-1:0][ENTRY_W-1:0]   emb,
  input  logic [ENC_PTS-1:0][2:0][FRAC_W-1:0] frac,
  output feat_t                               feat [ENC_PTS][FEAT_DIM]
);
  for (genvar p = 0; p < ENC_PTS; p++) begin : g_pt
    logic [FRAC_W:0]  wf [3];      // per axis (0 = x): f
    logic [FRAC_W:0]  wn [3];      // per axis: 1-f
    logic [26:0]      w  [8];
    for (genvar a = 0; a < 3; a++) begin : g_ax
      assign wf[a] = {1'b0, frac[p][2-a]};
      assign wn[a] = (FRAC_W+1)'(1 << FRAC_W) - {1'b0, frac[p][2-a]};
    end
    for (genvar v = 0; v < 8; v++) begin : g_w
      assign w[v] = 27'((v & 4) != 0 ? wf[0] : wn[0]) * 27'((v & 2) != 0 ? wf[1] : wn[1])
                  * 27'((v & 1) != 0 ? wf[2] : wn[2]);
    end
    for (genvar f = 0; f < FEAT_DIM; f++) begin : g_f
      logic signed [35:0] acc;
      always_comb begin
        acc = '0;
        for (int v = 0; v < 8; v++)
          acc += $signed({1'b0, w[v]}) * 36'($signed(emb[p*8+v][f*FEAT_W +: FEAT_W]));
        feat[p][f] = feat_t'(acc >>> 24);
      end
    end
  end
endmodule
