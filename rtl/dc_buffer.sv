// dc_buffer: density & color buffer of the current ray.
//
// One entry per sample point (up to DEPTH = 192, the full-rate sample
// count): density sigma, the three color channels and a has_color flag that
// tells whether the color came from the color network. Written by the MLP
// engine in any order (by point index), read through three combinational
// ports by the render engine (the point itself and the two ends of its
// approximation group). clear resets all has_color flags.
module dc_buffer
  import asdr_pkg::*;
#(
  parameter int unsigned DEPTH = asdr_pkg::NS_FULL
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            we,
  input  logic [NS_W-1:0] widx,
  input  logic [7:0]      wsigma,
  input  col_t            wrgb [3],
  input  logic            whc,
  input  logic [NS_W-1:0] ridx  [3],
  output logic [7:0]      rsigma[3],
  output col_t            rrgb  [3][3],
  output logic            rhc   [3]
);
  logic [7:0] sig [DEPTH];
  col_t       rgb [DEPTH][3];
  logic       hc  [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) hc[i] <= 1'b0;
    end else if (clear) begin
      for (int i = 0; i < DEPTH; i++) hc[i] <= 1'b0;
    end else if (we && 32'(widx) < DEPTH) begin
      hc[widx] <= whc;
    end
  end
  always_ff @(posedge clk)
    if (we && 32'(widx) < DEPTH) begin
      sig[widx] <= wsigma;
      rgb[widx] <= wrgb;
    end

  always_comb
    for (int p = 0; p < 3; p++) begin
      if (32'(ridx[p]) < DEPTH) begin
        rsigma[p] = sig[ridx[p]];
        rrgb[p]   = rgb[ridx[p]];
        rhc[p]    = hc[ridx[p]];
      end else begin
        rsigma[p] = '0;
        rrgb[p]   = '{default: '0};
        rhc[p]    = 1'b0;
      end
    end
endmodule
