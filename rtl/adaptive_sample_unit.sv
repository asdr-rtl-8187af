// adaptive_sample_unit: picks the number of samples a pixel needs.
//
// Inputs are the colors of one ray rendered with ns_0 = ns, ns_1 = ns/2, ...
// ns_{NUM_NS-1} = ns/16 points (16-bit per channel). For every reduced
// render i the unit computes the rendering difficulty
//   rd_i = max(|r_ns - r_i|, |g_ns - g_i|, |b_ns - b_i|)
// with subtractors and a MAX tree, compares it with the threshold delta
// (rd_i <= thr) and returns the code of the smallest ns_i that passes
// (ns_i = ns >> code); code 0 (full rate) if none passes. All comparisons
// are done in parallel; the result is registered (one cycle latency after
// in_valid). The metric and the selection rule follow the design.
module adaptive_sample_unit
  import asdr_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [COLACC_W-1:0]  col [NUM_NS][3],
  input  logic [COLACC_W-1:0]  thr,
  output logic                 out_valid,
  output logic [CODE_W-1:0]    code,
  output logic [COLACC_W-1:0]  rd [NUM_NS]
);
  logic [CODE_W-1:0] pick;
  always_comb begin
    pick = '0;
    for (int i = 0; i < NUM_NS; i++) begin
      logic [COLACC_W-1:0] m, d;
      m = '0;
      for (int ch = 0; ch < 3; ch++) begin
        d = (col[0][ch] > col[i][ch]) ? col[0][ch] - col[i][ch] : col[i][ch] - col[0][ch];
        if (d > m) m = d;
      end
      rd[i] = m;
      if (i > 0 && m <= thr) pick = CODE_W'(i);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      code      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) code <= pick;
    end
  end
endmodule
