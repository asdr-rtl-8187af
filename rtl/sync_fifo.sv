// sync_fifo: synchronous FIFO used as the address buffer of the encoding
// engine (and for small tag queues).
//
// Valid/ready on both sides: a word is written when wr_valid && wr_ready and
// read when rd_valid && rd_ready; rd_data shows the oldest word whenever
// rd_valid is high (first-word fall-through). A simultaneous write and read
// on a full FIFO is refused on the write side (wr_ready is low when full).
// DEPTH is a power of two. The buffer decouples the address generator from
// the variable-latency embedding lookup; its depth is not given by the
// design and is this implementation's choice.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [W-1:0] wr_data,
  output logic         rd_valid,
  input  logic         rd_ready,
  output logic [W-1:0] rd_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wp, rp;
  logic          do_wr, do_rd;

  assign wr_ready = (wp - rp) != (AW+1)'(DEPTH);
  assign rd_valid = wp != rp;
  assign rd_data  = mem[rp[AW-1:0]];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
    end
  end
  always_ff @(posedge clk) if (do_wr) mem[wp[AW-1:0]] <= wr_data;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  (wp - rp) <= (AW+1)'(DEPTH));
endmodule
