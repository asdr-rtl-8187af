// reg_cache: register-based cache of one embedding table.
//
// ENTRIES registers hold the most recently read table entries with their
// addresses. Every lookup lane compares its address with all entries at
// once (all-to-all comparators); a match is a hit and the cached embedding is
// returned in the same cycle, so the crossbar read is bypassed. Entries read
// from the crossbars on a miss are written back through the insert lanes.
// Replacement is least-recently-used: every entry has an age (0 = most
// recent, ENTRIES-1 = least recent; the ages are always a permutation).
// A hit on lane k (look_en[k]) makes the entry most recent; the lanes are
// applied in order 0..NLOOK-1, then the inserts in order 0..NINS-1. An insert
// of an address already cached refreshes it instead of taking a second entry.
// An insert goes to an invalid entry if there is one, otherwise to the LRU
// entry. flush invalidates everything (used when the tables are rewritten).
// Lookup is combinational; state changes at the clock edge.
module reg_cache
  import asdr_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned NLOOK   = 16,
  parameter int unsigned NINS    = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                flush,
  input  logic [NLOOK-1:0]    look_en,
  input  maddr_t              look_addr [NLOOK],
  output logic [NLOOK-1:0]    hit,
  output logic [ENTRY_W-1:0]  hit_data [NLOOK],
  input  logic [NINS-1:0]     ins_en,
  input  maddr_t              ins_addr [NINS],
  input  logic [ENTRY_W-1:0]  ins_data [NINS]
);
  localparam int unsigned EW = $clog2(ENTRIES);

  logic               vld  [ENTRIES];
  maddr_t             tag  [ENTRIES];
  logic [ENTRY_W-1:0] dat  [ENTRIES];
  logic [EW-1:0]      age  [ENTRIES];

  logic               vld_n [ENTRIES];
  maddr_t             tag_n [ENTRIES];
  logic [ENTRY_W-1:0] dat_n [ENTRIES];
  logic [EW-1:0]      age_n [ENTRIES];

  // all-to-all compare
  always_comb begin
    for (int k = 0; k < NLOOK; k++) begin
      hit[k]      = 1'b0;
      hit_data[k] = '0;
      for (int e = 0; e < ENTRIES; e++)
        if (vld[e] && tag[e] == look_addr[k]) begin
          hit[k]      = 1'b1;
          hit_data[k] = dat[e];
        end
    end
  end

  always_comb begin
    int unsigned sel;
    logic        found;
    for (int e = 0; e < ENTRIES; e++) begin
      vld_n[e] = vld[e];
      tag_n[e] = tag[e];
      dat_n[e] = dat[e];
      age_n[e] = age[e];
    end
    // hits refresh their entry
    for (int k = 0; k < NLOOK; k++) begin
      found = 1'b0;
      sel   = 0;
      for (int e = 0; e < ENTRIES; e++)
        if (vld[e] && tag[e] == look_addr[k]) begin
          found = 1'b1;
          sel   = e;
        end
      if (look_en[k] && found) begin
        for (int f = 0; f < ENTRIES; f++)
          if (age_n[f] < age_n[sel]) age_n[f] = age_n[f] + 1'b1;
        age_n[sel] = '0;
      end
    end
    // inserts
    for (int k = 0; k < NINS; k++) begin
      found = 1'b0;
      sel   = 0;
      for (int e = 0; e < ENTRIES; e++)
        if (vld_n[e] && tag_n[e] == ins_addr[k]) begin
          found = 1'b1;
          sel   = e;
        end
      if (!found) begin
        // LRU entry, or the first invalid one
        for (int e = ENTRIES - 1; e >= 0; e--)
          if (age_n[e] == EW'(ENTRIES - 1)) sel = e;
        for (int e = ENTRIES - 1; e >= 0; e--)
          if (!vld_n[e]) sel = e;
      end
      if (ins_en[k]) begin
        vld_n[sel] = 1'b1;
        tag_n[sel] = ins_addr[k];
        dat_n[sel] = ins_data[k];
        for (int f = 0; f < ENTRIES; f++)
          if (age_n[f] < age_n[sel]) age_n[f] = age_n[f] + 1'b1;
        age_n[sel] = '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin
        vld[e] <= 1'b0;
        tag[e] <= '0;
        dat[e] <= '0;
        age[e] <= EW'(e);
      end
    end else if (flush) begin
      for (int e = 0; e < ENTRIES; e++) vld[e] <= 1'b0;
    end else begin
      for (int e = 0; e < ENTRIES; e++) begin
        vld[e] <= vld_n[e];
        tag[e] <= tag_n[e];
        dat[e] <= dat_n[e];
        age[e] <= age_n[e];
      end
    end
  end
endmodule
