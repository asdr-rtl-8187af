// tb_embed_fetch: drives address batches straight into the lookup stage and
// checks the returned embeddings against the programmed table, plus timing:
//   * 16 lanes in 16 different crossbars: result after one round;
//   * 16 lanes in one crossbar, 16 different rows: 16 rounds, conflicts;
//   * 16 lanes reading the same row: one shared read;
//   * a low-resolution batch repeated: the second pass is all cache hits;
//   * random batches from a small address pool with random back-pressure.
module tb_embed_fetch;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  abatch_t in_batch;
  ebatch_t out_batch;
  logic tbl_we;
  maddr_t tbl_waddr;
  logic [ENTRY_W-1:0] tbl_wdata;
  logic [31:0] cnt_hits, cnt_reads, cnt_conflict_cycles;
  int checks = 0, failures = 0;
  embed_fetch dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  task automatic prog(int a);
    @(negedge clk);
    tbl_we = 1; tbl_waddr = maddr_t'(a); tbl_wdata = ENTRY_W'(ref_entry(a));
    @(negedge clk);
    tbl_we = 0;
  endtask

  // send one batch, wait for the result, return the latency in cycles
  task automatic run(int lvl, int a[16], output int lat);
    abatch_t b;
    b = '0;
    b.level = LEVEL_W'(lvl);
    b.pvalid = '1;
    for (int k = 0; k < 16; k++) b.addr[k] = MEM_AW'(a[k]);
    @(negedge clk);
    in_valid = 1; in_batch = b;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    lat = 0;   // rounds: the first one ends at the next rising edge
    while (!out_valid) begin @(negedge clk); lat++; end
    for (int k = 0; k < 16; k++)
      check(int'(out_batch.emb[k]) == ref_entry(a[k]), $sformatf("lane %0d addr %h", k, a[k]));
    check(out_batch.level == LEVEL_W'(lvl), "level passes through");
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
  endtask

  initial begin
    int a[16];
    int lat, r0, c0, h0;
    int pool[$];
    in_valid = 0; out_ready = 0; tbl_we = 0; in_batch = '0; tbl_waddr = '0; tbl_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. conflict-free, hashed level (no cache)
    for (int k = 0; k < 16; k++) begin a[k] = (10 << 16) | (k << 6) | ($urandom % 64); prog(a[k]); end
    c0 = cnt_conflict_cycles;
    run(10, a, lat);
    check(lat == 1 && cnt_conflict_cycles == c0, $sformatf("conflict-free latency %0d", lat));
    // 2. all in crossbar 5, different rows
    for (int k = 0; k < 16; k++) begin a[k] = (12 << 16) | (5 << 6) | k; prog(a[k]); end
    c0 = cnt_conflict_cycles;
    run(12, a, lat);
    check(lat == 16, $sformatf("16-way conflict latency %0d", lat));
    check(cnt_conflict_cycles - c0 == 15, $sformatf("conflict cycles %0d", cnt_conflict_cycles - c0));
    // 3. same row everywhere: one shared read
    for (int k = 0; k < 16; k++) a[k] = (12 << 16) | (5 << 6) | 3;
    r0 = cnt_reads;
    run(12, a, lat);
    check(lat == 1 && cnt_reads - r0 == 1, $sformatf("shared read latency %0d reads %0d", lat, cnt_reads - r0));
    // 4. level 0 batch twice: all hits the second time
    for (int k = 0; k < 8; k++) begin a[k] = (k * 1031) & 16'h0FFF; a[k + 8] = a[k]; prog(a[k]); end
    run(0, a, lat);
    h0 = cnt_hits; r0 = cnt_reads;
    run(0, a, lat);
    check(cnt_hits - h0 == 16 && cnt_reads == r0 && lat == 1,
          $sformatf("cache pass: hits %0d reads %0d lat %0d", cnt_hits - h0, cnt_reads - r0, lat));
    // 5. random batches (levels 0..15) over a pool of 40 addresses per level
    for (int l = 0; l < 16; l++)
      for (int i = 0; i < 40; i++) begin
        automatic int ad = (l << 16) | ($urandom & 16'hFFFF);
        pool.push_back(ad);
        prog(ad);
      end
    for (int t = 0; t < 300; t++) begin
      automatic int l = $urandom % 16;
      for (int k = 0; k < 16; k++) a[k] = pool[l * 40 + ($urandom % 40)];
      run(l, a, lat);
      check(lat >= 1 && lat <= 16, "latency bound");
    end
    check(cnt_hits > 0 && cnt_conflict_cycles > 0, "mechanisms seen");
    $display("hits %0d reads %0d conflict cycles %0d", cnt_hits, cnt_reads, cnt_conflict_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
