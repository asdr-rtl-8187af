// cim_layer: one fully connected MLP layer on a CIM array.
//
// The layer y = W x (IN <= 64 inputs, OUT outputs, int8 weights and inputs)
// is stored in NPE = ceil(8*OUT/64) CIM PEs: input i is row i; output o
// uses the eight columns 8*(o%8) .. 8*(o%8)+7 of PE o/8, column 8*(o%8)+k
// holding bit k of W[o][i] (two's complement, bit 7 weighs -128).
// The inputs are applied bit-serially, one bit plane per cycle (bit 7, the
// sign, weighs -128). The accumulation units shift and add the ADC outputs:
//   y[o] = sum_b s_b 2^b sum_k s_k 2^k adc_b[PE o/8][8*(o%8)+k]
// with s_7 = -1 and s = +1 otherwise. A pulse on start (with x) begins the
// eight cycles; done pulses one cycle after the last plane and y holds until
// the next start. Outputs o >= OUT read 0. The bit-slicing and bit-serial
// schedule are this implementation's choice; the design gives the crossbar
// size, the 5-bit ADC and the accumulation units.
module cim_layer
  import asdr_pkg::*;
#(
  parameter int unsigned IN  = 64,
  parameter int unsigned OUT = 64,
  localparam int unsigned NPE = (8 * OUT + XBAR_N - 1) / XBAR_N
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [7:0]   x [MLP_MAXW],
  output logic                busy,
  output logic                done,
  output logic signed [ACC_W-1:0] y [MLP_MAXW],
  // weight programming, one crossbar row at a time
  input  logic                wr_en,
  input  logic [3:0]          wr_pe,
  input  logic [5:0]          wr_row,
  input  logic [XBAR_N-1:0]   wr_data
);
  logic signed [7:0]  xr [MLP_MAXW];
  logic [2:0]         bitn;
  logic [XBAR_N-1:0]  plane;
  logic [ADC_W-1:0]   adc [NPE][XBAR_N];

  always_comb begin
    plane = '0;
    for (int r = 0; r < IN; r++) plane[r] = xr[r][bitn];
  end

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    cim_pe u_pe (.clk, .wr_en(wr_en && 32'(wr_pe) == p), .wr_row, .wr_data,
                 .in_bits(plane), .adc(adc[p]));
  end

  // accumulation units
  logic signed [ACC_W-1:0] part [OUT];
  always_comb begin
    for (int o = 0; o < OUT; o++) begin
      logic signed [ACC_W-1:0] s;
      s = '0;
      for (int k = 0; k < 8; k++) begin
        logic signed [ACC_W-1:0] t;
        t = ACC_W'(adc[o/8][(o%8)*8+k]) <<< k;
        s = (k == 7) ? s - t : s + t;
      end
      part[o] = s <<< bitn;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      bitn <= '0;
      for (int i = 0; i < MLP_MAXW; i++) begin
        xr[i] <= '0;
        y[i]  <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        bitn <= '0;
        xr   <= x;
        for (int i = 0; i < MLP_MAXW; i++) y[i] <= '0;
      end else if (busy) begin
        for (int o = 0; o < OUT; o++)
          y[o] <= (bitn == 3'd7) ? y[o] - part[o] : y[o] + part[o];
        bitn <= bitn + 1'b1;
        if (bitn == 3'd7) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
