// mlp_subengine: a CIM sub-engine (density or color network).
//
// NL fully connected layers of sizes D0 -> D1 -> ... -> D{NL}, each on its
// own CIM array (cim_layer), so all weights stay in the crossbars. Layers
// run one after another, 8 bit-serial cycles, one cycle to finish the sum
// and one for the nonlinear
// function unit:
//   hidden layers : a = min(127, max(0, y >>> shift))        (ReLU, int8)
//   last layer    : OUT_MODE 0 (density): v[i] = clamp_s8(y[i] >>> shift),
//                   sigma = min(255, max(0, y[0] >>> shift))
//                   OUT_MODE 1 (color)  : v[i] = clamp_u8((y[i] >>> shift) + 128)
//                   (a hard sigmoid)
// Handshake: in_valid/in_ready, out_valid/out_ready; one vector at a time.
// Latency NL*10 + 1 cycles from acceptance to out_valid.
// The layer structure (density net 32-64-16 giving density and a
// 15-dimensional feature; color net 16-64-64-3) follows the Instant-NGP
// networks the design accelerates; the activation functions and fixed-point
// scaling are this implementation's choice.
module mlp_subengine
  import asdr_pkg::*;
#(
  parameter int unsigned NL = 2,
  parameter int unsigned D0 = 32,
  parameter int unsigned D1 = 64,
  parameter int unsigned D2 = 16,
  parameter int unsigned D3 = 0,
  parameter bit          OUT_MODE = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        shift,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic signed [7:0] in_vec [MLP_MAXW],
  output logic              out_valid,
  input  logic              out_ready,
  output logic [7:0]        out_vec [16],
  output logic [7:0]        out_sigma,
  // weight programming
  input  logic              wr_en,
  input  logic [1:0]        wr_layer,
  input  logic [3:0]        wr_pe,
  input  logic [5:0]        wr_row,
  input  logic [XBAR_N-1:0] wr_data
);
  function automatic int unsigned dim(input int unsigned i);
    case (i)
      0: return D0;
      1: return D1;
      2: return D2;
      default: return D3;
    endcase
  endfunction

  function automatic logic signed [7:0] sat_s8(input logic signed [ACC_W-1:0] v);
    if (v > 127) return 8'sd127;
    if (v < -128) return -8'sd128;
    return v[7:0];
  endfunction
  function automatic logic [7:0] sat_u8(input logic signed [ACC_W-1:0] v);
    if (v > 255) return 8'd255;
    if (v < 0) return 8'd0;
    return v[7:0];
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_t;
  state_t            st;
  logic [1:0]        cur;
  logic signed [7:0] act [MLP_MAXW];
  logic [NL-1:0]     l_start, l_done;
  logic signed [ACC_W-1:0] l_y [NL][MLP_MAXW];
  logic signed [ACC_W-1:0] y_cur [MLP_MAXW];   // output of the running layer
  logic signed [7:0]       a_nx  [MLP_MAXW];   // its ReLU activation
  logic [NL-1:0]           nx_start;           // start of the next layer
  logic                    last;               // running layer is the last

  always_comb begin
    for (int i = 0; i < MLP_MAXW; i++) y_cur[i] = '0;
    nx_start = '0;
    for (int l = 0; l < NL; l++)
      if (32'(cur) == l) begin
        y_cur = l_y[l];
        if (l + 1 < NL) nx_start[(l + 1) % NL] = 1'b1;
      end
    last = 32'(cur) == NL - 1;
    for (int i = 0; i < MLP_MAXW; i++) begin
      logic signed [ACC_W-1:0] t;
      t = y_cur[i] >>> shift;
      a_nx[i] = (t < 0) ? 8'sd0 : (t > 127) ? 8'sd127 : t[7:0];
    end
  end

  for (genvar l = 0; l < NL; l++) begin : g_layer
    logic bsy;
    cim_layer #(.IN(dim(l)), .OUT(dim(l+1))) u_layer (
      .clk, .rst_n, .start(l_start[l]), .x(act), .busy(bsy), .done(l_done[l]),
      .y(l_y[l]), .wr_en(wr_en && 32'(wr_layer) == l), .wr_pe, .wr_row, .wr_data
    );
  end

  assign in_ready = st == S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      cur       <= '0;
      l_start   <= '0;
      out_valid <= 1'b0;
      out_sigma <= '0;
      for (int i = 0; i < MLP_MAXW; i++) act[i] <= '0;
      for (int i = 0; i < 16; i++) out_vec[i] <= '0;
    end else begin
      l_start <= '0;
      case (st)
        S_IDLE: if (in_valid) begin
          for (int i = 0; i < MLP_MAXW; i++) act[i] <= (i < D0) ? in_vec[i] : 8'sd0;
          cur        <= '0;
          l_start[0] <= 1'b1;
          st         <= S_RUN;
        end
        S_RUN: if (l_done != '0) begin   // only the running layer can finish
          if (last) begin
            for (int i = 0; i < 16; i++)
              out_vec[i] <= OUT_MODE ? sat_u8((y_cur[i] >>> shift) + 128)
                                     : sat_s8(y_cur[i] >>> shift);
            out_sigma <= sat_u8(y_cur[0] >>> shift);
            out_valid <= 1'b1;
            st        <= S_OUT;
          end else begin
            act     <= a_nx;
            cur     <= cur + 1'b1;
            l_start <= nx_start;
          end
        end
        default: if (out_ready) begin
          out_valid <= 1'b0;
          st        <= S_IDLE;
        end
      endcase
    end
  end
endmodule
