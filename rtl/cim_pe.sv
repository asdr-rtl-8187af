// cim_pe: behavioural model of one ReRAM computing-in-memory PE, a 64 x 64
// crossbar of single-level cells with 1-bit DAC inputs and 5-bit ADCs.
//
// This is a behavioural model of an analog part. Each cell stores one bit
// (LRS = 1, HRS = 0). An input bit vector drives the 64 rows; the current of
// column c is the number of rows whose input and cell are both 1, and the
// column ADC converts it with 5-bit precision, saturating at 31:
//   adc[c] = min(31, popcount(in_bits & column_c))
// Device noise and non-linearity are not modelled. Cells are written one
// row at a time (wr_en, wr_row, wr_data); conversion is combinational.
// Crossbar size and ADC precision are those of the design; saturation at
// full scale is this model's choice.
module cim_pe
  import asdr_pkg::*;
(
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [5:0]           wr_row,
  input  logic [XBAR_N-1:0]    wr_data,
  input  logic [XBAR_N-1:0]    in_bits,
  output logic [ADC_W-1:0]     adc [XBAR_N]
);
  logic [XBAR_N-1:0] cells [XBAR_N];   // cells[row][column]

  always_ff @(posedge clk) if (wr_en) cells[wr_row] <= wr_data;

  for (genvar c = 0; c < XBAR_N; c++) begin : g_col
    logic [XBAR_N-1:0] colv;      // column c seen as a row-indexed vector
    logic [6:0]        cur;       // number of conducting cells, 0..64
    for (genvar r = 0; r < XBAR_N; r++) begin : g_row
      assign colv[r] = cells[r][c];
    end
    assign cur    = 7'($countones(in_bits & colv));
    assign adc[c] = (cur > 7'd31) ? ADC_W'(31) : ADC_W'(cur);
  end
endmodule
