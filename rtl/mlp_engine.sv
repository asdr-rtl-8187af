// mlp_engine: density sub-engine followed by a skippable color sub-engine.
//
// Every encoded point goes through the density network (32 -> 64 -> 16),
// which yields the density sigma (uint8) and a 16-entry int8 vector (the
// density output and 15 features). Points whose tag asks for a color
// (need_color, the first point of each approximation group) continue into
// the color network (16 -> 64 -> 64 -> 3); for all other points the color
// sub-engine is bypassed and the result leaves with has_color = 0, to be
// interpolated later by the approximation unit. One point is in the engine
// at a time; latency is 21 cycles of density network, plus 31 of color
// plus handshake cycles. Weights are written through wr_* (wr_net 0 =
// density, 1 = color). cnt_color and cnt_bypass count the two paths.
// Lint note: the sigma output of the color sub-engine is unused (the color
// network has no density output).
module mlp_engine
  import asdr_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        shift_d,
  input  logic [3:0]        shift_c,
  input  logic              in_valid,
  output logic              in_ready,
  input  feat_t             in_feat [ENC_W],
  input  ptag_t             in_tag,
  output logic              out_valid,
  input  logic              out_ready,
  output ptag_t             out_tag,
  output logic [7:0]        out_sigma,
  output col_t              out_rgb [3],
  output logic              out_has_color,
  input  logic              wr_en,
  input  logic              wr_net,
  input  logic [1:0]        wr_layer,
  input  logic [3:0]        wr_pe,
  input  logic [5:0]        wr_row,
  input  logic [XBAR_N-1:0] wr_data,
  output logic [31:0]       cnt_color,
  output logic [31:0]       cnt_bypass
);
  typedef enum logic [1:0] {M_IDLE, M_DENS, M_COLOR, M_OUT} mstate_t;
  mstate_t st;

  logic signed [7:0] d_in [MLP_MAXW];
  logic signed [7:0] c_in [MLP_MAXW];
  logic       d_ivalid, d_iready, d_ovalid, c_ivalid, c_iready, c_ovalid;
  logic [7:0] d_vec [16];
  logic [7:0] c_vec [16];
  logic [7:0] d_sigma, c_sigma;

  always_comb begin
    for (int i = 0; i < MLP_MAXW; i++) begin
      d_in[i] = (i < ENC_W) ? in_feat[i] : 8'sd0;
      c_in[i] = (i < 16) ? $signed(d_vec[i]) : 8'sd0;
    end
  end

  assign in_ready = st == M_IDLE && d_iready;
  assign d_ivalid = st == M_IDLE && in_valid;
  assign c_ivalid = st == M_DENS && d_ovalid && out_tag.need_color;

  mlp_subengine #(.NL(2), .D0(ENC_W), .D1(64), .D2(16), .OUT_MODE(1'b0)) u_density (
    .clk, .rst_n, .shift(shift_d),
    .in_valid(d_ivalid), .in_ready(d_iready), .in_vec(d_in),
    .out_valid(d_ovalid), .out_ready(st == M_DENS && (!out_tag.need_color || c_iready)),
    .out_vec(d_vec), .out_sigma(d_sigma),
    .wr_en(wr_en && !wr_net), .wr_layer, .wr_pe, .wr_row, .wr_data
  );

  mlp_subengine #(.NL(3), .D0(16), .D1(64), .D2(64), .D3(3), .OUT_MODE(1'b1)) u_color (
    .clk, .rst_n, .shift(shift_c),
    .in_valid(c_ivalid), .in_ready(c_iready), .in_vec(c_in),
    .out_valid(c_ovalid), .out_ready(st == M_COLOR),
    .out_vec(c_vec), .out_sigma(c_sigma),
    .wr_en(wr_en && wr_net), .wr_layer, .wr_pe, .wr_row, .wr_data
  );

  assign out_valid = st == M_OUT;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE;
      out_tag <= '0;
      out_sigma <= '0;
      out_has_color <= 1'b0;
      for (int c = 0; c < 3; c++) out_rgb[c] <= '0;
      cnt_color <= '0;
      cnt_bypass <= '0;
    end else begin
      case (st)
        M_IDLE: if (in_valid && in_ready) begin
          out_tag <= in_tag;
          st      <= M_DENS;
        end
        M_DENS: if (d_ovalid) begin
          out_sigma <= d_sigma;
          if (out_tag.need_color) begin
            if (c_iready) st <= M_COLOR;
          end else begin
            out_has_color <= 1'b0;
            for (int c = 0; c < 3; c++) out_rgb[c] <= '0;
            cnt_bypass <= cnt_bypass + 1;
            st <= M_OUT;
          end
        end
        M_COLOR: if (c_ovalid) begin
          out_has_color <= 1'b1;
          for (int c = 0; c < 3; c++) out_rgb[c] <= c_vec[c];
          cnt_color <= cnt_color + 1;
          st <= M_OUT;
        end
        default: if (out_ready) st <= M_IDLE;
      endcase
    end
  end
endmodule
