// sync_fifo: single-clock first-word-fall-through FIFO used by the hit buffers and the
// ROR output buffers.
//
// Storage is a plain array (maps to distributed or block RAM). push/pop with full and
// empty flags; out_data shows the oldest entry while !empty. A push when full is
// ignored and reported on `drop`; a pop when empty is ignored. count gives the fill
// level. Push and pop in the same cycle are allowed. Zero latency from push to
// !empty on the next cycle.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16    // power of two
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] in_data,
  input  logic         pop,
  output logic [W-1:0] out_data,
  output logic         empty,
  output logic         full,
  output logic         drop,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp_q, rp_q;
  logic         do_push, do_pop;

  assign empty    = (wp_q == rp_q);
  assign full     = (wp_q[AW-1:0] == rp_q[AW-1:0]) && (wp_q[AW] != rp_q[AW]);
  assign do_push  = push && !full;
  assign do_pop   = pop && !empty;
  assign drop     = push && full;
  assign count    = wp_q - rp_q;
  assign out_data = mem[rp_q[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= '0;
      rp_q <= '0;
    end else begin
      if (do_push) wp_q <= wp_q + 1'b1;
      if (do_pop)  rp_q <= rp_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp_q[AW-1:0]] <= in_data;
  end
endmodule
