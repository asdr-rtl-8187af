// approx_unit: color approximation for points that skipped the color MLP.
//
// The points of a ray are split into groups of n = 2^n_log2; only the first
// point of each group has a computed color. A point at offset k (0 < k < n)
// inside a group starting at point a gets the linear interpolation between
// the colors of points a and a+n (uniform sample spacing, so the distance
// ratio is k/n):
//   c = c_a + floor((c_b - c_a) * k / n)        per channel
// implemented with one multiplier, one adder and a shift per channel. If the
// group has no end point (b_valid = 0, the last group of the ray) the color
// of point a is held. Combinational. The interpolation follows the design;
// the treatment of the last group is this implementation's choice.
module approx_unit
  import asdr_pkg::*;
(
  input  col_t       c_a [3],
  input  col_t       c_b [3],
  input  logic       b_valid,
  input  logic [2:0] k,
  input  logic [1:0] n_log2,
  output col_t       c   [3]
);
  always_comb
    for (int ch = 0; ch < 3; ch++) begin
      logic signed [12:0] diff, prod;
      diff = 13'($signed({1'b0, c_b[ch]})) - 13'($signed({1'b0, c_a[ch]}));
      prod = diff * $signed({10'b0, k});
      c[ch] = b_valid ? col_t'(13'($signed({1'b0, c_a[ch]})) + (prod >>> n_log2)) : c_a[ch];
    end
endmodule
