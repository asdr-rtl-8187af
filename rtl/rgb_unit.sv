// rgb_unit: volume rendering of one ray, NUM_NS renders in parallel.
//
// For each point (sigma_i, c_i) of a ray, in order, the classic compositing
//   alpha_i = 1 - exp(-sigma_i * delta),  C += T * alpha_i * c_i,
//   T <- T * (1 - alpha_i)
// is applied. Render r (0..NUM_NS-1) uses only every 2^r-th point
// (idx % 2^r == 0) with a step of delta << r, so one pass over the ray gives
// the colors rendered with ns, ns/2, ..., ns/16 points that the adaptive
// sampling unit compares. Render 0 is the pixel color.
// Fixed point: sigma uint8, delta Q4.8 (delta_in is the spacing of the
// ray's own points), T and alpha Q0.16, C accumulated in Q8.16.
// exp(-x) is evaluated as 2^-(x*log2 e): the integer part is a shift, the
// fractional part f (Q0.8) a quadratic, 2^-f ~ 1 - 0.6565 f + 0.1606 f^2.
// Outputs: col[r][ch] = C >> 8 (16 bit, 1/256 of a color step) and the
// 8-bit pixel. start clears the accumulators; one point per cycle (pt_valid).
// Compositing follows the design's volume rendering equation; the number
// formats and the exp approximation are this implementation's choice.
module rgb_unit
  import asdr_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [11:0]      delta_in,
  input  logic             pt_valid,
  input  logic [NS_W-1:0]  pt_idx,
  input  logic [7:0]       pt_sigma,
  input  col_t             pt_rgb [3],
  output logic [COLACC_W-1:0] col [NUM_NS][3],
  output col_t             pixel [3]
);
  // e = exp(-sigma*delta) in Q0.16
  function automatic logic [16:0] exp_neg(input logic [7:0] s, input logic [15:0] d);
    logic [23:0] x;     // Q.8
    logic [33:0] y;     // Q.16 before trimming
    logic [15:0] yi;
    logic [7:0]  yf;
    logic [33:0] e;
    x  = 24'(s) * 24'(d);
    y  = (34'(x) * 34'd369) >> 8;          // * log2(e), Q.8
    yi = 16'(y >> 8);
    yf = y[7:0];
    if (yi >= 16) return '0;
    e = 34'd65536 - ((34'd43027 * 34'(yf)) >> 8) + ((34'd10525 * 34'(yf) * 34'(yf)) >> 16);
    return 17'(e >> yi);
  endfunction

  logic [16:0] tr  [NUM_NS];         // transmittance, Q0.16 (65536 = 1)
  logic [31:0] acc [NUM_NS][3];      // Q8.16
  logic [16:0] e_r [NUM_NS];         // exp(-sigma * delta_r) of this point
  logic [33:0] w_r [NUM_NS];         // T * alpha of this point

  always_comb begin
    for (int r = 0; r < NUM_NS; r++) begin
      e_r[r] = exp_neg(pt_sigma, 16'(delta_in) << r);
      w_r[r] = (34'(tr[r]) * 34'(17'd65536 - e_r[r])) >> 16;
    end
  end

  always_comb begin
    for (int r = 0; r < NUM_NS; r++)
      for (int ch = 0; ch < 3; ch++) col[r][ch] = COLACC_W'(acc[r][ch] >> 8);
    for (int ch = 0; ch < 3; ch++) pixel[ch] = col_t'(acc[0][ch] >> 16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NUM_NS; r++) begin
        tr[r] <= 17'd65536;
        for (int ch = 0; ch < 3; ch++) acc[r][ch] <= '0;
      end
    end else if (start) begin
      for (int r = 0; r < NUM_NS; r++) begin
        tr[r] <= 17'd65536;
        for (int ch = 0; ch < 3; ch++) acc[r][ch] <= '0;
      end
    end else if (pt_valid) begin
      for (int r = 0; r < NUM_NS; r++) begin
        if ((pt_idx & NS_W'((1 << r) - 1)) == '0) begin
          for (int ch = 0; ch < 3; ch++)
            acc[r][ch] <= acc[r][ch] + 32'(w_r[r] * 34'(pt_rgb[ch]));
          tr[r] <= 17'((34'(tr[r]) * 34'(e_r[r])) >> 16);
        end
      end
    end
  end
endmodule
