// embed_fetch: embedding lookup of the encoding engine, between the address
// buffer and the fusion unit.
//
// One batch holds the ENC_LANES vertex addresses (ENC_PTS points x 8
// vertices) of one resolution level. Every cycle, for each lane still
// waiting:
//   * the register cache of the batch's table is searched (all-to-all
//     compare); a hit is taken at once and bypasses the crossbars;
//   * the remaining lanes ask the memory crossbars. A crossbar reads one row
//     per cycle, so a lane is granted only if no lower-numbered waiting lane
//     wants a different row of the same crossbar. Lanes that want the same
//     row share the read. Lanes that lose retry next cycle (a read conflict);
//   * each entry read from the crossbars is written into the cache (LRU).
// The fetched embeddings wait in the embed buffer until the whole batch is
// complete, then the batch is offered to the fusion unit (valid/ready).
// Only the CACHE_TABLES lowest-resolution tables have a cache, each with
// CACHE_ENTRIES registers: 4 x 8 = 32 cached entries in the edge
// configuration. The design states that cache sizes differ between tables by
// locality; the split is this implementation's choice.
// Counters: cache hits, crossbar rows read, conflict cycles (cycles in which
// some lane lost arbitration).
module embed_fetch
  import asdr_pkg::*;
#(
  parameter int unsigned CACHE_TABLES  = 4,
  parameter int unsigned CACHE_ENTRIES = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush,
  // address buffer side
  input  logic        in_valid,
  output logic        in_ready,
  input  abatch_t     in_batch,
  // fusion side
  output logic        out_valid,
  input  logic        out_ready,
  output ebatch_t     out_batch,
  // table programming
  input  logic        tbl_we,
  input  maddr_t      tbl_waddr,
  input  logic [ENTRY_W-1:0] tbl_wdata,
  // statistics
  output logic [31:0] cnt_hits,
  output logic [31:0] cnt_reads,
  output logic [31:0] cnt_conflict_cycles
);
  localparam int unsigned N = ENC_LANES;

  abatch_t              cur;
  logic                 cur_v;
  logic [N-1:0]         done;
  logic [ENTRY_W-1:0]   data [N];

  logic [N-1:0]         lane_v, pend, chit, grant, ins;
  logic [ENTRY_W-1:0]   cdata [N];
  logic [ENTRY_W-1:0]   mdata [N];
  maddr_t               la [N];
  logic                 all_done, cached_lvl;

  always_comb
    for (int k = 0; k < N; k++) begin
      la[k]     = cur.addr[k];
      lane_v[k] = cur.pvalid[k / 8];
    end

  assign cached_lvl = 32'(cur.level) < CACHE_TABLES;
  assign all_done   = (done & lane_v) == lane_v;
  assign pend       = cur_v ? (lane_v & ~done) : '0;

  // ---------------- register caches ----------------
  logic [N-1:0]       hit_t  [CACHE_TABLES];
  logic [ENTRY_W-1:0] hdat_t [CACHE_TABLES][N];
  for (genvar t = 0; t < CACHE_TABLES; t++) begin : g_cache
    logic sel;
    assign sel = cur_v && (32'(cur.level) == t);
    reg_cache #(.ENTRIES(CACHE_ENTRIES), .NLOOK(N), .NINS(N)) u_cache (
      .clk, .rst_n, .flush,
      .look_en  (sel ? pend : '0),
      .look_addr(la),
      .hit      (hit_t[t]),
      .hit_data (hdat_t[t]),
      .ins_en   (sel ? ins : '0),
      .ins_addr (la),
      .ins_data (mdata)
    );
  end

  always_comb begin
    chit = '0;
    for (int k = 0; k < N; k++) cdata[k] = '0;
    for (int t = 0; t < CACHE_TABLES; t++)
      if (cached_lvl && 32'(cur.level) == t) begin
        chit = hit_t[t] & pend;
        for (int k = 0; k < N; k++) cdata[k] = hdat_t[t][k];
      end
  end

  // ---------------- crossbar arbitration ----------------
  logic [N-1:0] want, first_of_addr;
  logic         conflict;
  int unsigned  nreads;
  always_comb begin
    want     = pend & ~chit;
    grant    = '0;
    conflict = 1'b0;
    first_of_addr = '0;
    nreads   = 0;
    for (int k = 0; k < N; k++) begin
      logic blocked, shared;
      blocked = 1'b0;
      shared  = 1'b0;
      for (int j = 0; j < k; j++) begin
        if (want[j] && (la[j] >> XBAR_ROWS_LOG2) == (la[k] >> XBAR_ROWS_LOG2)
            && la[j] != la[k]) blocked = 1'b1;
        if (want[j] && la[j] == la[k]) shared = 1'b1;
      end
      grant[k] = want[k] && !blocked;
      if (want[k] && blocked) conflict = 1'b1;
      first_of_addr[k] = grant[k] && !shared;
      if (first_of_addr[k]) nreads++;
    end
    ins = cached_lvl ? first_of_addr : '0;
  end

  mem_xbars #(.NPORTS(N)) u_xbars (
    .clk, .we(tbl_we), .waddr(tbl_waddr), .wdata(tbl_wdata),
    .re(first_of_addr), .raddr(la), .rdata(mdata)
  );

  // ---------------- embed buffer ----------------
  assign out_valid = cur_v && all_done;
  assign in_ready  = !cur_v || (all_done && out_ready);

  always_comb begin
    out_batch.level  = cur.level;
    out_batch.pvalid = cur.pvalid;
    out_batch.frac   = cur.frac;
    for (int k = 0; k < N; k++) out_batch.emb[k] = data[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_v <= 1'b0;
      cur   <= '0;
      done  <= '0;
      for (int k = 0; k < N; k++) data[k] <= '0;
      cnt_hits <= '0;
      cnt_reads <= '0;
      cnt_conflict_cycles <= '0;
    end else begin
      if (in_valid && in_ready) begin
        cur_v <= 1'b1;
        cur   <= in_batch;
        done  <= '0;
      end else if (out_valid && out_ready) begin
        cur_v <= 1'b0;
      end else if (cur_v) begin
        for (int k = 0; k < N; k++) begin
          if (chit[k])       data[k] <= cdata[k];
          else if (grant[k]) data[k] <= mdata[k];
        end
        done <= done | chit | grant;
      end
      cnt_hits  <= cnt_hits + 32'($countones(chit));
      cnt_reads <= cnt_reads + 32'(nreads);
      if (conflict) cnt_conflict_cycles <= cnt_conflict_cycles + 1;
    end
  end
endmodule
