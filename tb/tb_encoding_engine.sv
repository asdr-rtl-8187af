// tb_encoding_engine: full multi-resolution encoding of random point pairs
// (including pairs with only lane 0 valid and points close together, which
// hit the caches) against the reference encoder. The tables are written
// through the table port with the reference table content, only at the
// addresses the test points touch. Output back-pressure is random. Checks
// all 32 features and the tag of every point and that points leave in order.
module tb_encoding_engine;
  import asdr_pkg::*;
  import asdr_ref_pkg::*;
  localparam int NPAIR = 60;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [ENC_PTS-1:0] in_pvalid;
  logic [COORD_W-1:0] in_x [ENC_PTS], in_y [ENC_PTS], in_z [ENC_PTS];
  ptag_t in_tag [ENC_PTS], out_tag;
  feat_t out_feat [ENC_W];
  logic tbl_we;
  maddr_t tbl_waddr;
  logic [ENTRY_W-1:0] tbl_wdata;
  logic [31:0] cnt_hits, cnt_reads, cnt_conflict_cycles;
  int checks = 0, failures = 0;
  int px[NPAIR][2], py[NPAIR][2], pz[NPAIR][2];
  bit pv[NPAIR][2];
  int exp_q[$];       // expected (pair*2+lane) in output order
  bit written[int];
  encoding_engine dut (.*);
  always #5 clk = ~clk;

  initial begin
    in_valid = 0; out_ready = 0; tbl_we = 0; tbl_waddr = '0; tbl_wdata = '0; in_pvalid = '0;
    for (int p = 0; p < ENC_PTS; p++) begin in_x[p] = '0; in_y[p] = '0; in_z[p] = '0; in_tag[p] = '0; end
    for (int i = 0; i < NPAIR; i++)
      for (int ln = 0; ln < 2; ln++) begin
        if (i > 0 && (($urandom >> 16) % 2)) begin   // a point near the previous one
          px[i][ln] = (px[i-1][ln] + $urandom % 300) & 16'hFFFF;
          py[i][ln] = (py[i-1][ln] + $urandom % 300) & 16'hFFFF;
          pz[i][ln] = (pz[i-1][ln] + $urandom % 300) & 16'hFFFF;
        end else begin
          px[i][ln] = $urandom & 16'hFFFF; py[i][ln] = $urandom & 16'hFFFF; pz[i][ln] = $urandom & 16'hFFFF;
        end
        pv[i][ln] = (ln == 0) || ($urandom % 5 != 0);
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NPAIR; i++)
      for (int ln = 0; ln < 2; ln++)
        for (int l = 0; l < 16; l++)
          for (int v = 0; v < 8; v++) begin
            automatic int a = ref_vaddr(l, px[i][ln], py[i][ln], pz[i][ln], ln, v);
            if (!written.exists(a)) begin
              written[a] = 1;
              @(negedge clk);
              tbl_we = 1; tbl_waddr = maddr_t'(a); tbl_wdata = ENTRY_W'(ref_entry(a));
            end
          end
    @(negedge clk) tbl_we = 0;
    fork
      for (int i = 0; i < NPAIR; i++) begin
        @(negedge clk);
        in_valid = 1;
        in_pvalid = {pv[i][1], pv[i][0]};
        for (int ln = 0; ln < 2; ln++) begin
          in_x[ln] = COORD_W'(px[i][ln]); in_y[ln] = COORD_W'(py[i][ln]); in_z[ln] = COORD_W'(pz[i][ln]);
          in_tag[ln].idx = NS_W'(i * 2 + ln);
          in_tag[ln].need_color = ln[0];
          if (pv[i][ln]) exp_q.push_back(i * 2 + ln);
        end
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 in_valid = 0;
      end
      begin
        automatic int got = 0, total = 0;
        for (int i = 0; i < NPAIR; i++) total += pv[i][0] + pv[i][1];
        while (got < total) begin
          @(negedge clk);
          out_ready = $urandom % 3 != 0;
          #1;
          if (out_valid && out_ready) begin
            automatic int id = exp_q.pop_front();
            automatic int f[32];
            ref_encode(px[id/2][id%2], py[id/2][id%2], pz[id/2][id%2], id % 2, f);
            checks++;
            if (int'(out_tag.idx) != (id & 255) || out_tag.need_color != id[0]) begin
              failures++; $display("tag %0d expected %0d", out_tag.idx, id);
            end
            for (int k = 0; k < 32; k++) begin
              checks++;
              if (int'(out_feat[k]) != f[k]) begin
                failures++;
                if (failures < 10) $display("point %0d feat %0d: %0d expected %0d", id, k, out_feat[k], f[k]);
              end
            end
            got++;
          end
        end
      end
    join
    checks++;
    if (cnt_hits == 0) begin failures++; $display("no cache hits"); end
    $display("hits %0d reads %0d conflict cycles %0d", cnt_hits, cnt_reads, cnt_conflict_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (300000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
