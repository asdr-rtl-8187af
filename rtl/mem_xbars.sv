// mem_xbars: the embedding-table memory built from memory crossbars.
//
// All NUM_LEVELS tables live in one entry-addressed array of
// 2^MEM_AW entries of ENTRY_W bits (16 tables x 2^16 x 16 bit = 2 MB in the
// edge configuration). Address = {level, table address}. The array is
// organised as crossbars of 2^XBAR_ROWS_LOG2 rows, one entry per row; the
// crossbar number is address >> XBAR_ROWS_LOG2. A crossbar reads one row per
// cycle, so two read ports may not address different rows of one crossbar in
// the same cycle; the requester (the lookup scheduler) guarantees this and an
// assertion checks it. Reads are combinational (the crossbar is read within
// the cycle); the write port loads the tables before rendering.
// The resistive storage itself is modelled as a plain array.
module mem_xbars
  import asdr_pkg::*;
#(
  parameter int unsigned NPORTS = asdr_pkg::ENC_LANES,
  parameter int unsigned AW     = asdr_pkg::MEM_AW
) (
  input  logic               clk,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [ENTRY_W-1:0] wdata,
  input  logic [NPORTS-1:0]  re,
  input  logic [AW-1:0]      raddr [NPORTS],
  output logic [ENTRY_W-1:0] rdata [NPORTS]
);
  logic [ENTRY_W-1:0] mem [2**AW];

  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  always_comb
    for (int k = 0; k < NPORTS; k++) rdata[k] = mem[raddr[k]];

  // one row per crossbar per cycle
  always_ff @(posedge clk)
    for (int i = 0; i < NPORTS; i++)
      for (int j = i + 1; j < NPORTS; j++)
        a_one_row: assert (!(re[i] && re[j]
                             && (raddr[i] >> XBAR_ROWS_LOG2) == (raddr[j] >> XBAR_ROWS_LOG2)
                             && raddr[i] != raddr[j]))
          else $error("two rows of crossbar %0d read in one cycle", raddr[i] >> XBAR_ROWS_LOG2);
endmodule
