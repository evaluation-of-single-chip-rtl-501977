// decomp_channel: decomposition channel, one per TRB input stream.
//
// Chain (as drawn in the paper's channel diagram): UDP payload bytes -> derandomizing
// buffer (125 MHz -> 200 MHz, 8 -> 32 bit) -> TRB parser, which also copies every
// word it consumes into the raw data buffer -> endpoint filter -> TDC parser ->
// geometry mapper -> hit stream to the processing pipelines.
// The channel waits for `go` from the combiner before it reads a packet, so all eight
// channels parse the same timeslot together; data_avail tells the combiner that the
// derandomizing buffer holds data. After the packet's last word, hit_end pulses
// once, behind the last hit of the timeslot (5 cycles after the trailing word that
// produced it). ts_valid/ts_num report the timeslot number at the packet start.
// Hits leave one per cycle at most, with no back-pressure: everything after the
// derandomizing buffer is streaming and adds no dead time, as the paper describes.
module decomp_channel
  import jpet_pkg::*;
#(
  parameter logic [2:0]  CH_IDX    = 3'd0,
  parameter logic [15:0] BASE_DEV  = 16'h0100,
  parameter int unsigned RX_DEPTH  = 2048,
  parameter int unsigned RAW_DEPTH = 4096
) (
  input  logic        clk_rx,
  input  logic        rst_rx_n,
  input  logic [7:0]  rx_byte,
  input  logic        rx_valid,
  input  logic        rx_last,

  input  logic        clk,
  input  logic        rst_n,
  input  cfg_wr_t     cfg,
  input  logic        go,
  output logic        data_avail,
  output logic        busy,
  output logic        ts_valid,
  output logic [31:0] ts_num,
  output logic        hit_valid,
  output hit_t        hit,
  output logic        hit_end,

  output logic [31:0] raw_data,
  output logic        raw_last,
  output logic        raw_valid,
  input  logic        raw_ready,
  output logic        raw_pkt_avail,

  output logic        rx_overflow,
  output logic [15:0] raw_drop_count,
  output logic [15:0] ep_reject_count,
  output logic [15:0] tdc_drop_count
);
  logic [31:0] d_data;
  logic        d_last, d_valid, d_ready, consumed;
  logic        p_valid, p_end;
  logic [31:0] p_word;
  logic [15:0] p_dev;
  logic        f_valid, f_end;
  logic [31:0] f_word;
  logic [1:0]  f_ep;
  logic        t_valid, t_end;
  logic [7:0]  t_ch;
  time_t       t_t;
  logic [WIDTH_W-1:0] t_w;
  logic        parser_busy;

  derand_fifo #(.DEPTH(RX_DEPTH)) u_derand (
    .wr_clk(clk_rx), .wr_rst_n(rst_rx_n), .wr_byte(rx_byte), .wr_valid(rx_valid),
    .wr_last(rx_last), .wr_overflow(rx_overflow),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_data(d_data), .rd_last(d_last),
    .rd_valid(d_valid), .rd_ready(d_ready));

  assign data_avail = d_valid;

  trb_parser u_parser (
    .clk, .rst_n, .go, .busy(parser_busy),
    .in_data(d_data), .in_last(d_last), .in_valid(d_valid), .in_ready(d_ready),
    .consumed, .ts_valid, .ts_num,
    .out_valid(p_valid), .out_word(p_word), .out_dev(p_dev), .out_end(p_end));

  raw_data_buffer #(.DEPTH(RAW_DEPTH)) u_raw (
    .clk, .rst_n, .in_valid(consumed), .in_data(d_data), .in_last(d_last),
    .out_data(raw_data), .out_last(raw_last), .out_valid(raw_valid), .out_ready(raw_ready),
    .pkt_avail(raw_pkt_avail), .drop_count(raw_drop_count));

  endpoint_filter #(.BASE_DEV(BASE_DEV), .N_EP(N_EP)) u_filter (
    .clk, .rst_n, .in_valid(p_valid), .in_word(p_word), .in_dev(p_dev), .in_end(p_end),
    .out_valid(f_valid), .out_word(f_word), .out_ep(f_ep), .out_end(f_end),
    .reject_count(ep_reject_count));

  tdc_parser #(.CH_IDX(CH_IDX)) u_tdc (
    .clk, .rst_n, .cfg, .in_valid(f_valid), .in_word(f_word), .in_ep(f_ep), .in_end(f_end),
    .out_valid(t_valid), .out_tdc_ch(t_ch), .out_t(t_t), .out_width(t_w), .out_end(t_end),
    .drop_count(tdc_drop_count));

  geo_mapper #(.CH_IDX(CH_IDX)) u_geo (
    .clk, .rst_n, .in_valid(t_valid), .in_tdc_ch(t_ch), .in_t(t_t), .in_width(t_w),
    .in_end(t_end), .out_valid(hit_valid), .out_hit(hit), .out_end(hit_end));

  assign busy = parser_busy;
endmodule
