// jpet_top: real-time timeslot processing chain of the J-PET controller.
//
// Eight TRB streams (UDP payload bytes, receiver clock) enter eight decomposition
// channels, which turn them into calibrated hits with detector coordinates. The data
// combiner starts all channels on the same timeslot and merges their hits into one
// eight-lane bus that feeds two processing pipelines side by side:
//   - coincidence search: 32 x 48 timebin/strip arrays per stream, single-strip AND,
//     multi-strip test, a timebin mask 5 cycles after the end of the timeslot;
//   - ROR calculation: hit buffers, filtering by that mask, 32 per-timebin ROR
//     processors, 4 round-robin packagers and the list-mode packet builder.
// The output stage sends either the raw TRB packets or the list-mode packets
// (register 0x0000 = 0 raw, 1 list-mode); ROR points also leave on a separate point
// stream for the host processor's point cloud. All control writes use the cfg port
// (register map in jpet_pkg). Core clock `clk` is 200 MHz in the paper, `clk_rx` the
// 125 MHz receiver clock; the two are asynchronous.
// The Ethernet/UDP receivers, the host processor, its memory path and the optical
// transceivers are outside this module: their signals are the ports.
module jpet_top
  import jpet_pkg::*;
#(
  parameter int unsigned RX_DEPTH    = 2048,
  parameter int unsigned RAW_DEPTH   = 4096,
  parameter int unsigned HIT_DEPTH   = 256,
  parameter int unsigned PROC_HITS   = 16,
  parameter int unsigned PKT_DEPTH   = 512,
  parameter logic [15:0] DEV_BASE    = 16'h0100   // device IDs: DEV_BASE + ch*16 + ep
) (
  input  logic        clk_rx,
  input  logic        rst_rx_n,
  input  logic [7:0]  rx_byte  [N_CH],
  input  logic [N_CH-1:0] rx_valid,
  input  logic [N_CH-1:0] rx_last,

  input  logic        clk,
  input  logic        rst_n,
  input  cfg_wr_t     cfg,

  output logic [31:0] out_data,
  output logic        out_last,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [3:0]  out_src,

  output logic        ror_valid,
  output ror_point_t  ror_point,

  output logic [31:0] ts_count,
  output logic [31:0] lor_ts_count,
  output logic [31:0] lm_pkt_count,
  output logic [15:0] mismatch_count,
  output logic [N_CH-1:0] rx_overflow
);
  localparam int unsigned N_PKG = 4;
  localparam int unsigned PER_PKG = N_TB / N_PKG;

  // ------------------------------------------------------------- control register
  logic mode_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mode_q <= 1'b0;
    else if (cfg.we && cfg.addr == REG_MODE) mode_q <= cfg.data[0];
  end

  // ------------------------------------------------------------- decomposition channels
  logic [N_CH-1:0] go_ch, data_avail, ch_busy, ts_valid, hit_valid, hit_end;
  logic [31:0]     ts_num [N_CH];
  hit_t            hit [N_CH];
  logic [31:0]     raw_data [N_CH];
  logic [N_CH-1:0] raw_last, raw_valid, raw_ready, raw_pkt_avail;
  logic [15:0]     raw_drop [N_CH];
  logic [15:0]     ep_rej [N_CH];
  logic [15:0]     tdc_drop [N_CH];
  logic            go;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    assign go_ch[c] = go;
    decomp_channel #(
      .CH_IDX(3'(c)), .BASE_DEV(DEV_BASE + 16'(c * 16)),
      .RX_DEPTH(RX_DEPTH), .RAW_DEPTH(RAW_DEPTH)
    ) u_ch (
      .clk_rx, .rst_rx_n, .rx_byte(rx_byte[c]), .rx_valid(rx_valid[c]), .rx_last(rx_last[c]),
      .clk, .rst_n, .cfg, .go(go_ch[c]), .data_avail(data_avail[c]), .busy(ch_busy[c]),
      .ts_valid(ts_valid[c]), .ts_num(ts_num[c]),
      .hit_valid(hit_valid[c]), .hit(hit[c]), .hit_end(hit_end[c]),
      .raw_data(raw_data[c]), .raw_last(raw_last[c]), .raw_valid(raw_valid[c]),
      .raw_ready(raw_ready[c]), .raw_pkt_avail(raw_pkt_avail[c]),
      .rx_overflow(rx_overflow[c]), .raw_drop_count(raw_drop[c]),
      .ep_reject_count(ep_rej[c]), .tdc_drop_count(tdc_drop[c]));
  end

  // ------------------------------------------------------------- data combiner
  logic [N_CH-1:0] bus_valid;
  hit_t            bus_hit [N_CH];
  logic            ts_end, ts_mismatch, can_accept;
  logic [31:0]     ts_end_num;

  data_combiner u_comb (
    .clk, .rst_n, .data_avail, .downstream_ready(can_accept), .go,
    .ts_valid, .ts_num, .in_valid(hit_valid), .in_hit(hit), .in_end(hit_end),
    .bus_valid, .bus_hit, .ts_end, .ts_end_num, .ts_mismatch, .mismatch_count, .ts_count);

  // ------------------------------------------------------------- coincidence pipeline
  logic            res_valid, lor_found;
  logic [31:0]     res_ts;
  logic [N_TB-1:0] tb_mask;
  logic [N_STRIP-1:0] strip_coinc [N_PAIR][N_TB];

  coinc_search u_coinc (
    .clk, .rst_n, .in_valid(bus_valid), .in_hit(bus_hit), .ts_end, .ts_num(ts_end_num),
    .res_valid, .res_ts, .lor_found, .tb_mask, .strip_coinc, .found_count(lor_ts_count));

  // ------------------------------------------------------------- ROR pipeline
  logic [N_TB-1:0] proc_valid, proc_ready, proc_idle, proc_empty, proc_pop;
  hit_t            proc_hit;
  ror_point_t      proc_point [N_TB];
  logic            flush, pipe_empty, ts_done;
  logic [31:0]     ts_done_num, pass_count, noise_count;
  logic [15:0]     hitbuf_ovf;
  logic [15:0]     proc_drop [N_TB];
  logic [15:0]     proc_pts [N_TB];

  ror_dispatcher #(.HIT_DEPTH(HIT_DEPTH)) u_disp (
    .clk, .rst_n, .in_valid(bus_valid), .in_hit(bus_hit), .ts_end,
    .res_valid, .res_ts, .res_mask(tb_mask), .can_accept,
    .proc_valid, .proc_hit, .proc_ready, .proc_idle, .flush, .pipe_empty,
    .ts_done, .ts_done_num, .pass_count, .noise_count, .overflow_count(hitbuf_ovf));

  for (genvar b = 0; b < N_TB; b++) begin : g_proc
    ror_processor #(.HIT_DEPTH(PROC_HITS)) u_proc (
      .clk, .rst_n, .in_valid(proc_valid[b]), .in_hit(proc_hit), .in_ready(proc_ready[b]),
      .flush, .idle(proc_idle[b]), .out_pop(proc_pop[b]), .out_point(proc_point[b]),
      .out_empty(proc_empty[b]), .drop_count(proc_drop[b]), .point_count(proc_pts[b]));
  end

  logic [N_PKG-1:0] pkg_valid, pkg_ready, pkg_busy;
  ror_point_t       pkg_point [N_PKG];
  for (genvar k = 0; k < N_PKG; k++) begin : g_pkg
    ror_point_t               grp_point [PER_PKG];
    logic [$clog2(PER_PKG)-1:0] src;
    for (genvar i = 0; i < PER_PKG; i++) begin : g_in
      assign grp_point[i] = proc_point[k * PER_PKG + i];
    end
    ror_packager #(.N_IN(PER_PKG)) u_pkg (
      .clk, .rst_n, .in_empty(proc_empty[k*PER_PKG +: PER_PKG]), .in_point(grp_point),
      .in_pop(proc_pop[k*PER_PKG +: PER_PKG]), .out_valid(pkg_valid[k]),
      .out_point(pkg_point[k]), .out_src(src), .out_ready(pkg_ready[k]), .busy(pkg_busy[k]));
  end
  assign pipe_empty = (&proc_empty) && !(|pkg_busy);

  logic [31:0] lm_data;
  logic        lm_valid, lm_last, lm_ready;
  logic [15:0] lm_trunc;
  listmode_builder #(.N_PKG(N_PKG), .PKT_DEPTH(PKT_DEPTH)) u_lm (
    .clk, .rst_n, .in_valid(pkg_valid), .in_point(pkg_point), .in_ready(pkg_ready),
    .ts_done, .ts_num(ts_done_num), .ror_valid, .ror_point,
    .pkt_data(lm_data), .pkt_valid(lm_valid), .pkt_last(lm_last), .pkt_ready(lm_ready),
    .pkt_count(lm_pkt_count), .trunc_count(lm_trunc));

  // ------------------------------------------------------------- output stage
  logic [31:0] raw_pkts, lm_pkts;
  output_select u_out (
    .clk, .rst_n, .mode(mode_q),
    .raw_data, .raw_last, .raw_valid, .raw_pkt_avail, .raw_ready,
    .lm_data, .lm_valid, .lm_last, .lm_ready,
    .out_data, .out_last, .out_valid, .out_ready, .out_src, .raw_pkts, .lm_pkts);
endmodule
