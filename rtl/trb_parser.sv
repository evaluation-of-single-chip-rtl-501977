// trb_parser: splits one TRB payload packet into timeslot number, device IDs and data.
//
// A packet carries one 20 us timeslot of one TRB board. This design assumes the
// following word layout (the paper names the fields but not their placement):
//   word 0            timeslot number
//   subevent header   {device_id[15:0], n_words[15:0]}
//   n_words words     TDC data of that device (endpoint)
//   ... further subevents until the word marked last.
// The parser starts on `go` (from the combiner, once all channels hold data) and then
// consumes one word per cycle while in_valid, until the last word of the packet.
// Outputs are registered, one cycle after the word is consumed: ts_valid with the
// timeslot number, out_valid with each data word and its device ID, and out_end in
// the cycle of the last data word (alone when the packet ends on a header).
// consumed mirrors the input handshake so the channel can copy each word to the raw
// data buffer. A subevent whose count runs past the last word simply ends there.
module trb_parser (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        go,
  output logic        busy,
  input  logic [31:0] in_data,
  input  logic        in_last,
  input  logic        in_valid,
  output logic        in_ready,
  output logic        consumed,
  output logic        ts_valid,
  output logic [31:0] ts_num,
  output logic        out_valid,
  output logic [31:0] out_word,
  output logic [15:0] out_dev,
  output logic        out_end
);
  typedef enum logic [1:0] {IDLE, TSNUM, SUBHDR, DATA} state_e;
  state_e      st_q;
  logic [15:0] left_q;
  logic [15:0] dev_q;

  assign in_ready = (st_q != IDLE);
  assign consumed = in_valid && in_ready;
  assign busy     = (st_q != IDLE) || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= IDLE;
      left_q    <= '0;
      dev_q     <= '0;
      ts_valid  <= 1'b0;
      ts_num    <= '0;
      out_valid <= 1'b0;
      out_word  <= '0;
      out_dev   <= '0;
      out_end   <= 1'b0;
    end else begin
      ts_valid  <= 1'b0;
      out_valid <= 1'b0;
      out_end   <= 1'b0;
      case (st_q)
        IDLE: if (go) st_q <= TSNUM;
        TSNUM: if (consumed) begin
          ts_valid <= 1'b1;
          ts_num   <= in_data;
          st_q     <= SUBHDR;
        end
        SUBHDR: if (consumed) begin
          dev_q  <= in_data[31:16];
          left_q <= in_data[15:0];
          st_q   <= (in_data[15:0] != 16'd0) ? DATA : SUBHDR;
        end
        DATA: if (consumed) begin
          out_valid <= 1'b1;
          out_word  <= in_data;
          out_dev   <= dev_q;
          left_q    <= left_q - 16'd1;
          if (left_q == 16'd1) st_q <= SUBHDR;
        end
        default: st_q <= IDLE;
      endcase
      if (consumed && in_last) begin
        st_q    <= IDLE;
        out_end <= 1'b1;
      end
    end
  end
endmodule
