// raw_data_buffer: copy of the original TRB packet words of one decomposition channel.
//
// Every payload word the channel reads from its derandomizing buffer is also written
// here, so the original packets stay available for raw-data output and offline
// cross-checks while the hit path processes them. The buffer is a single-clock FIFO of
// {last, word} that also counts the complete packets it holds; pkt_avail lets the
// output stage start a packet only once all of it is stored, so raw packets leave
// the chip whole and never interleave.
//
// in_valid/in_data/in_last: one word per cycle, no back-pressure (the hit path must
// not stall). A word that finds the buffer full is dropped and counted in
// drop_count. out_*: first-word-fall-through, out_valid/out_ready handshake.
// The separate raw path follows the paper; depth and the packet counting are this
// design's choices.
module raw_data_buffer #(
  parameter int unsigned DEPTH = 4096   // words; power of two
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] in_data,
  input  logic        in_last,
  output logic [31:0] out_data,
  output logic        out_last,
  output logic        out_valid,
  input  logic        out_ready,
  output logic        pkt_avail,
  output logic [15:0] drop_count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [32:0] mem [DEPTH];
  logic [AW:0] wp_q, rp_q;
  logic [15:0] pkts_q;
  logic        full, push, pop, pkt_in, pkt_out;

  assign full      = (wp_q[AW-1:0] == rp_q[AW-1:0]) && (wp_q[AW] != rp_q[AW]);
  assign out_valid = (wp_q != rp_q);
  assign push      = in_valid && !full;
  assign pop       = out_valid && out_ready;
  assign {out_last, out_data} = mem[rp_q[AW-1:0]];
  assign pkt_in    = push && in_last;
  assign pkt_out   = pop && out_last;
  assign pkt_avail = (pkts_q != 16'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q       <= '0;
      rp_q       <= '0;
      pkts_q     <= '0;
      drop_count <= '0;
    end else begin
      if (push) wp_q <= wp_q + 1'b1;
      if (pop)  rp_q <= rp_q + 1'b1;
      if (pkt_in && !pkt_out)      pkts_q <= pkts_q + 16'd1;
      else if (!pkt_in && pkt_out) pkts_q <= pkts_q - 16'd1;
      if (in_valid && full && drop_count != 16'hFFFF) drop_count <= drop_count + 16'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp_q[AW-1:0]] <= {in_last, in_data};
  end
endmodule
