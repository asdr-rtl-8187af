// asdr_top: the ASDR neural-rendering accelerator (edge configuration).
//
// Three engines and a controller:
//   encoding engine : hybrid address generator (hash / de-hashed low
//                     resolution addresses), address buffer, register caches,
//                     memory crossbars holding the 16 embedding tables, embed
//                     buffer, fusion unit (trilinear interpolation).
//   MLP engine      : CIM density sub-engine and skippable color sub-engine.
//   render engine   : density & color buffer, approximation unit, RGB
//                     computation unit, adaptive sampling unit.
//   controller      : phase I (grid pixels at full sample rate, sample counts
//                     from the adaptive sampling unit) and phase II (all
//                     pixels, bilinearly interpolated sample counts).
// A frame starts with a pulse on start and ends with frame_done. The host
// answers ray requests (pixel -> ray origin, per-sample step, spacing) and
// takes pixels from the pixel port, both valid/ready. Before a frame the
// host writes the embedding tables (tbl_*) and the MLP weights (w_*).
// Configuration: image size, grid pitch d, approximation group size
// 2^n_log2, adaptive-sampling threshold thr (16-bit color units, 1/256 of
// an 8-bit step), requantisation shifts of the two networks.
// The statistics counters count each mechanism of the design.
// Lint note: the five render results (rend_col) and the need_color bit of
// the MLP tag are not used at this level; they stay visible for debug.
// rst_n drives both the asynchronous resets and the disable condition of
// the handshake assertions, which lint reports as a sync/async mix.
module asdr_top
  import asdr_pkg::*;
#(
  parameter int unsigned CACHE_TABLES  = 4,
  parameter int unsigned CACHE_ENTRIES = 8,
  parameter int unsigned MAX_GX        = 400,
  parameter int unsigned MAX_GY        = 400
) (
  input  logic              clk,
  input  logic              rst_n,
  // frame control and configuration
  input  logic              start,
  output logic              busy,
  output logic              frame_done,
  output logic [1:0]        phase,
  input  logic [11:0]       cfg_img_w,
  input  logic [11:0]       cfg_img_h,
  input  logic [3:0]        cfg_d,
  input  logic [1:0]        cfg_n_log2,
  input  logic [COLACC_W-1:0] cfg_thr,
  input  logic [3:0]        cfg_shift_d,
  input  logic [3:0]        cfg_shift_c,
  // ray bus
  output logic              ray_req_valid,
  input  logic              ray_req_ready,
  output logic [11:0]       ray_req_x,
  output logic [11:0]       ray_req_y,
  input  logic              ray_rsp_valid,
  output logic              ray_rsp_ready,
  input  logic [COORD_W-1:0] ray_p0 [3],
  input  logic [COORD_W-1:0] ray_dp [3],
  input  logic [7:0]        ray_delta,
  // pixel output
  output logic              pix_valid,
  input  logic              pix_ready,
  output logic [11:0]       pix_x,
  output logic [11:0]       pix_y,
  output col_t              pix_rgb [3],
  // embedding table programming
  input  logic              tbl_we,
  input  maddr_t            tbl_waddr,
  input  logic [ENTRY_W-1:0] tbl_wdata,
  // CIM weight programming
  input  logic              w_en,
  input  logic              w_net,
  input  logic [1:0]        w_layer,
  input  logic [3:0]        w_pe,
  input  logic [5:0]        w_row,
  input  logic [XBAR_N-1:0] w_data,
  // statistics
  output logic [31:0]       cnt_cache_hits,
  output logic [31:0]       cnt_xbar_reads,
  output logic [31:0]       cnt_conflict_cycles,
  output logic [31:0]       cnt_color_mlp,
  output logic [31:0]       cnt_color_bypass,
  output logic [31:0]       cnt_approx,
  output logic [31:0]       cnt_grid_rays,
  output logic [31:0]       cnt_reduced_pixels
);
  // controller -> encoding engine
  logic               pt_valid, pt_ready;
  logic [ENC_PTS-1:0] pt_pvalid;
  logic [COORD_W-1:0] pt_x [ENC_PTS], pt_y [ENC_PTS], pt_z [ENC_PTS];
  ptag_t              pt_tag [ENC_PTS];
  // encoding -> MLP
  logic               enc_valid, enc_ready;
  feat_t              enc_feat [ENC_W];
  ptag_t              enc_tag;
  // MLP -> render
  logic               mlp_valid;
  ptag_t              mlp_tag;
  logic [7:0]         mlp_sigma;
  col_t               mlp_rgb [3];
  logic               mlp_hc;
  // controller <-> render
  logic               ray_begin, rend_done;
  logic [NS_W-1:0]    ray_m;
  logic [11:0]        ray_dl;
  logic [CODE_W-1:0]  rend_code;
  col_t               rend_pixel [3];
  logic [COLACC_W-1:0] rend_col [NUM_NS][3];

  asdr_controller #(.MAX_GX(MAX_GX), .MAX_GY(MAX_GY)) u_ctrl (
    .clk, .rst_n, .start, .busy, .frame_done, .phase,
    .img_w(cfg_img_w), .img_h(cfg_img_h), .d(cfg_d), .n_log2(cfg_n_log2),
    .ray_req_valid, .ray_req_ready, .ray_req_x, .ray_req_y,
    .ray_rsp_valid, .ray_rsp_ready, .ray_p0, .ray_dp, .ray_delta,
    .pt_valid, .pt_ready, .pt_pvalid, .pt_x, .pt_y, .pt_z, .pt_tag,
    .ray_begin, .ray_m, .ray_dl, .rend_done, .rend_code, .rend_pixel,
    .pix_valid, .pix_ready, .pix_x, .pix_y, .pix_rgb,
    .cnt_grid_rays, .cnt_reduced_pixels
  );

  encoding_engine #(.CACHE_TABLES(CACHE_TABLES), .CACHE_ENTRIES(CACHE_ENTRIES)) u_enc (
    .clk, .rst_n,
    .in_valid(pt_valid), .in_ready(pt_ready), .in_pvalid(pt_pvalid),
    .in_x(pt_x), .in_y(pt_y), .in_z(pt_z), .in_tag(pt_tag),
    .out_valid(enc_valid), .out_ready(enc_ready), .out_feat(enc_feat), .out_tag(enc_tag),
    .tbl_we, .tbl_waddr, .tbl_wdata,
    .cnt_hits(cnt_cache_hits), .cnt_reads(cnt_xbar_reads),
    .cnt_conflict_cycles
  );

  mlp_engine u_mlp (
    .clk, .rst_n, .shift_d(cfg_shift_d), .shift_c(cfg_shift_c),
    .in_valid(enc_valid), .in_ready(enc_ready), .in_feat(enc_feat), .in_tag(enc_tag),
    .out_valid(mlp_valid), .out_ready(1'b1), .out_tag(mlp_tag), .out_sigma(mlp_sigma),
    .out_rgb(mlp_rgb), .out_has_color(mlp_hc),
    .wr_en(w_en), .wr_net(w_net), .wr_layer(w_layer), .wr_pe(w_pe), .wr_row(w_row),
    .wr_data(w_data), .cnt_color(cnt_color_mlp), .cnt_bypass(cnt_color_bypass)
  );

  render_engine u_render (
    .clk, .rst_n, .ray_begin, .ray_m, .ray_n_log2(cfg_n_log2), .ray_delta(ray_dl),
    .thr(cfg_thr),
    .pt_we(mlp_valid), .pt_idx(mlp_tag.idx), .pt_sigma(mlp_sigma), .pt_rgb(mlp_rgb),
    .pt_hc(mlp_hc),
    .done(rend_done), .pixel(rend_pixel), .code(rend_code), .col(rend_col),
    .cnt_approx
  );
endmodule
