// derand_fifo: derandomizing buffer of one decomposition channel.
//
// The eight TRB boards send their part of a timeslot at the same moment, but packets
// arrive with small offsets because their lengths differ. This buffer absorbs those
// offsets: it takes the UDP payload as bytes in the receiver clock domain (8 bit at
// 125 MHz in the paper), packs four bytes into one 32-bit word (first byte in bits
// 31:24) and hands the words to the 200 MHz core domain through a dual-clock FIFO
// with Gray-coded pointers and two-flop synchronisers.
//
// Write side: wr_byte/wr_valid/wr_last, last marks the final byte of a packet. A
// packet length must be a multiple of 4 bytes (TRB words are 32 bit). A word that
// arrives when the FIFO is full is dropped and wr_overflow pulses.
// Read side: first-word-fall-through, rd_valid/rd_ready handshake; rd_last is the
// final word of a packet.
// Latency: a word is visible on the read side 3-4 read clocks after its last byte.
// The dual-clock buffer and the byte packing follow the paper's clocking
// (8 bit / 125 MHz in, 32 bit / 200 MHz out); the depth is this design's choice.
module derand_fifo #(
  parameter int unsigned DEPTH = 2048   // words; power of two
) (
  input  logic        wr_clk,
  input  logic        wr_rst_n,
  input  logic [7:0]  wr_byte,
  input  logic        wr_valid,
  input  logic        wr_last,
  output logic        wr_overflow,

  input  logic        rd_clk,
  input  logic        rd_rst_n,
  output logic [31:0] rd_data,
  output logic        rd_last,
  output logic        rd_valid,
  input  logic        rd_ready
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [32:0] mem [DEPTH];
  logic [AW:0] rbin_q, rgray_ptr_q;
  logic [AW:0] wgray_s1, wgray_s2;

  // ------------------------------------------------------------ write domain
  logic [23:0] pack_q;
  logic [1:0]  nbyte_q;
  logic [AW:0] wbin_q, wgray_q;
  logic [AW:0] rgray_s1, rgray_s2;
  logic        full;
  logic        push;
  logic [31:0] push_word;

  assign push_word = {pack_q, wr_byte};
  assign push      = wr_valid && (nbyte_q == 2'd3);
  assign full      = (wgray_q == {~rgray_s2[AW:AW-1], rgray_s2[AW-2:0]});

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      pack_q      <= '0;
      nbyte_q     <= '0;
      wbin_q      <= '0;
      wgray_q     <= '0;
      rgray_s1    <= '0;
      rgray_s2    <= '0;
      wr_overflow <= 1'b0;
    end else begin
      rgray_s1    <= rgray_ptr_q;
      rgray_s2    <= rgray_s1;
      wr_overflow <= 1'b0;
      if (wr_valid) begin
        pack_q  <= {pack_q[15:0], wr_byte};
        nbyte_q <= wr_last ? 2'd0 : nbyte_q + 2'd1;
      end
      if (push) begin
        if (!full) begin
          wbin_q  <= wbin_q + 1'b1;
          wgray_q <= ((wbin_q + 1'b1) >> 1) ^ (wbin_q + 1'b1);
        end else begin
          wr_overflow <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (push && !full) mem[wbin_q[AW-1:0]] <= {wr_last, push_word};
  end

  // ------------------------------------------------------------ read domain
  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin_q      <= '0;
      rgray_ptr_q <= '0;
      wgray_s1    <= '0;
      wgray_s2    <= '0;
    end else begin
      wgray_s1 <= wgray_q;
      wgray_s2 <= wgray_s1;
      if (rd_valid && rd_ready) begin
        rbin_q      <= rbin_q + 1'b1;
        rgray_ptr_q <= ((rbin_q + 1'b1) >> 1) ^ (rbin_q + 1'b1);
      end
    end
  end

  assign rd_valid = (rgray_ptr_q != wgray_s2);
  assign {rd_last, rd_data} = mem[rbin_q[AW-1:0]];

endmodule
