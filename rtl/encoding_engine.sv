// encoding_engine: multi-resolution embedding of sample points.
//
// Pipeline (all stages valid/ready):
//   1. Hybrid address generator. A pair of points (ENC_PTS = 2 with the 16
//      address units of the edge configuration) is accepted; for levels
//      0..15, one level per cycle, the 16 vertex addresses and the trilinear
//      fractions are written into the address buffer.
//   2. Address buffer: a FIFO of ADDR_BUF_DEPTH batches.
//   3. embed_fetch: register caches, memory crossbars with conflict
//      serialisation, embed buffer. Takes one cycle per conflict-free round
//      plus one.
//   4. Fusion unit: trilinear interpolation of each batch; the two features
//      of level l go to positions 2l, 2l+1 of the point's 32-feature
//      encoding (concatenation over levels).
//   5. When level 15 of a pair is fused, the pair moves to the output
//      register and its points leave one per cycle (lane 0 first) with the
//      tag that entered with them.
// in_pvalid marks which lanes of the pair hold a point (an odd count of
// points leaves lane 1 empty). Table contents are written through tbl_*;
// tbl_we also flushes the caches.
module encoding_engine
  import asdr_pkg::*;
#(
  parameter int unsigned ADDR_BUF_DEPTH = 4,
  parameter int unsigned CACHE_TABLES   = 4,
  parameter int unsigned CACHE_ENTRIES  = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  // point pairs
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [ENC_PTS-1:0] in_pvalid,
  input  logic [COORD_W-1:0] in_x [ENC_PTS],
  input  logic [COORD_W-1:0] in_y [ENC_PTS],
  input  logic [COORD_W-1:0] in_z [ENC_PTS],
  input  ptag_t         in_tag [ENC_PTS],
  // encoded points
  output logic          out_valid,
  input  logic          out_ready,
  output feat_t         out_feat [ENC_W],
  output ptag_t         out_tag,
  // table programming
  input  logic          tbl_we,
  input  maddr_t        tbl_waddr,
  input  logic [ENTRY_W-1:0] tbl_wdata,
  // statistics
  output logic [31:0]   cnt_hits,
  output logic [31:0]   cnt_reads,
  output logic [31:0]   cnt_conflict_cycles
);
  // ---------------- 1. address generation ----------------
  logic                 ag_active;
  logic [LEVEL_W-1:0]   ag_level;
  logic [ENC_PTS-1:0]   ag_pvalid;
  logic [COORD_W-1:0]   ag_x [ENC_PTS], ag_y [ENC_PTS], ag_z [ENC_PTS];
  maddr_t               ag_addr [ENC_PTS][8];
  logic [FRAC_W-1:0]    ag_fx [ENC_PTS], ag_fy [ENC_PTS], ag_fz [ENC_PTS];
  abatch_t              ag_batch;
  logic                 ab_wr_ready, tag_wr_ready;

  hybrid_addr_gen #(.NLANES(AG_LANES)) u_ag (
    .level(ag_level), .px(ag_x), .py(ag_y), .pz(ag_z),
    .addr(ag_addr), .fx(ag_fx), .fy(ag_fy), .fz(ag_fz)
  );

  always_comb begin
    ag_batch.level  = ag_level;
    ag_batch.pvalid = ag_pvalid;
    for (int p = 0; p < ENC_PTS; p++) begin
      for (int v = 0; v < 8; v++) ag_batch.addr[p*8+v] = ag_addr[p][v];
      ag_batch.frac[p] = {ag_fx[p], ag_fy[p], ag_fz[p]};
    end
  end

  assign in_ready = !ag_active && tag_wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ag_active <= 1'b0;
      ag_level  <= '0;
      ag_pvalid <= '0;
      for (int p = 0; p < ENC_PTS; p++) begin
        ag_x[p] <= '0; ag_y[p] <= '0; ag_z[p] <= '0;
      end
    end else if (in_valid && in_ready) begin
      ag_active <= 1'b1;
      ag_level  <= '0;
      ag_pvalid <= in_pvalid;
      ag_x <= in_x; ag_y <= in_y; ag_z <= in_z;
    end else if (ag_active && ab_wr_ready) begin
      ag_level <= ag_level + 1'b1;
      if (ag_level == LEVEL_W'(NUM_LEVELS - 1)) ag_active <= 1'b0;
    end
  end

  // tags of accepted pairs wait here until their pair is complete
  localparam int unsigned TAGW = $bits(ptag_t) * ENC_PTS + ENC_PTS;
  logic [TAGW-1:0] tag_in, tag_out;
  logic            tag_rd_valid, tag_rd;
  always_comb begin
    tag_in = TAGW'(in_pvalid);
    for (int p = 0; p < ENC_PTS; p++)
      tag_in[ENC_PTS + p*$bits(ptag_t) +: $bits(ptag_t)] = in_tag[p];
  end
  sync_fifo #(.W(TAGW), .DEPTH(4)) u_tagq (
    .clk, .rst_n, .wr_valid(in_valid && in_ready), .wr_ready(tag_wr_ready),
    .wr_data(tag_in), .rd_valid(tag_rd_valid), .rd_ready(tag_rd), .rd_data(tag_out)
  );

  // ---------------- 2. address buffer ----------------
  abatch_t ab_out;
  logic    ab_valid, ab_ready;
  sync_fifo #(.W($bits(abatch_t)), .DEPTH(ADDR_BUF_DEPTH)) u_addr_buf (
    .clk, .rst_n, .wr_valid(ag_active), .wr_ready(ab_wr_ready), .wr_data(ag_batch),
    .rd_valid(ab_valid), .rd_ready(ab_ready), .rd_data(ab_out)
  );

  // ---------------- 3. embedding lookup ----------------
  ebatch_t eb;
  logic    eb_valid, eb_ready;
  embed_fetch #(.CACHE_TABLES(CACHE_TABLES), .CACHE_ENTRIES(CACHE_ENTRIES)) u_fetch (
    .clk, .rst_n, .flush(tbl_we),
    .in_valid(ab_valid), .in_ready(ab_ready), .in_batch(ab_out),
    .out_valid(eb_valid), .out_ready(eb_ready), .out_batch(eb),
    .tbl_we, .tbl_waddr, .tbl_wdata,
    .cnt_hits, .cnt_reads, .cnt_conflict_cycles
  );

  // ---------------- 4. fusion ----------------
  feat_t fused [ENC_PTS][FEAT_DIM];
  fusion_unit u_fusion (.emb(eb.emb), .frac(eb.frac), .feat(fused));

  feat_t  asm_feat [ENC_PTS][ENC_W];
  feat_t  o_feat   [ENC_PTS][ENC_W];
  logic [ENC_PTS-1:0] o_pend;
  ptag_t  o_tag [ENC_PTS];
  logic   last_lvl, o_free;

  assign last_lvl = eb.level == LEVEL_W'(NUM_LEVELS - 1);
  assign o_free   = o_pend == '0;
  assign eb_ready = !last_lvl || (o_free && tag_rd_valid);
  assign tag_rd   = eb_valid && last_lvl && o_free && tag_rd_valid;

  // ---------------- 5. output ----------------
  int unsigned osel;
  always_comb begin
    osel = 0;
    for (int p = ENC_PTS - 1; p >= 0; p--) if (o_pend[p]) osel = p;
  end
  assign out_valid = !o_free;
  assign out_tag   = o_tag[osel];
  always_comb for (int i = 0; i < ENC_W; i++) out_feat[i] = o_feat[osel][i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_pend <= '0;
      for (int p = 0; p < ENC_PTS; p++) begin
        o_tag[p] <= '0;
        for (int i = 0; i < ENC_W; i++) begin
          asm_feat[p][i] <= '0;
          o_feat[p][i]   <= '0;
        end
      end
    end else begin
      if (out_valid && out_ready) o_pend[osel] <= 1'b0;
      if (eb_valid && eb_ready) begin
        for (int p = 0; p < ENC_PTS; p++)
          for (int f = 0; f < FEAT_DIM; f++)
            asm_feat[p][32'(eb.level)*FEAT_DIM + f] <= fused[p][f];
        if (last_lvl) begin
          o_pend <= tag_out[ENC_PTS-1:0];
          for (int p = 0; p < ENC_PTS; p++) begin
            o_tag[p] <= tag_out[ENC_PTS + p*$bits(ptag_t) +: $bits(ptag_t)];
            for (int i = 0; i < ENC_W - FEAT_DIM; i++) o_feat[p][i] <= asm_feat[p][i];
            for (int f = 0; f < FEAT_DIM; f++)
              o_feat[p][ENC_W - FEAT_DIM + f] <= fused[p][f];
          end
        end
      end
    end
  end
endmodule
