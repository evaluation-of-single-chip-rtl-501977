`timescale 1ns/1ps
// tb_jpet_top: end-to-end test of the whole processing chain at default parameters.
//
// A behavioural model of the eight TRB boards builds, for every timeslot, eight UDP
// payloads in the TRB3 word format: subevent per TDC endpoint, reference hit on
// channel 0, epoch words when the coarse counter wraps, leading and trailing edges of
// all hits, plus a subevent of a foreign device that must be filtered out. Timeslots
// either hold one annihilation (both sides of two strips on different layers, all
// four thresholds) or only side-A noise. The bytes are fed at 125 MHz with a random
// start offset per stream.
// Checks: every ROR point against a real-valued reference of the ROR formula
// (tolerance 4 mm), one point per annihilation and none otherwise; list-mode packet
// header, timeslot number and contents in list-mode; in raw mode every packet that
// leaves must equal the one that was sent. Counted mechanisms, each must occur:
// LOR timeslots, empty timeslots, list-mode packets, raw packets, a mode switch,
// epoch wrap inside a timeslot, rejected foreign-device words, hits dropped as noise,
// output back-pressure.
module tb_jpet_top;
  import jpet_pkg::*;

  logic clk = 0, clk_rx = 0, rst_n = 0, rst_rx_n = 0;
  always #2.5 clk = ~clk;     // 200 MHz
  always #4.0 clk_rx = ~clk_rx; // 125 MHz

  logic [7:0] rx_byte [N_CH];
  logic [N_CH-1:0] rx_valid, rx_last;
  cfg_wr_t cfg;
  logic [31:0] out_data;
  logic out_last, out_valid, out_ready;
  logic [3:0] out_src;
  logic ror_valid;
  ror_point_t ror_point;
  logic [31:0] ts_count, lor_ts_count, lm_pkt_count;
  logic [15:0] mismatch_count;
  logic [N_CH-1:0] rx_overflow;

  jpet_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  // ------------------------------------------------------------------ watchdog
  initial begin
    #3ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ geometry reference
  function automatic void strip_xy(input int layer, input int strip, output int x, output int y);
    real r, a;
    if (layer == 1) begin r = 425.0; a = 7.5 * (strip - 1); end
    else if (layer == 2) begin r = 467.5; a = 3.75 + 7.5 * (strip - 1); end
    else begin r = 575.0; a = 1.875 + 3.75 * (strip - 1); end
    x = int'($floor(r * $cos(a * 3.14159265358979 / 180.0) + 0.5));
    y = int'($floor(r * $sin(a * 3.14159265358979 / 180.0) + 0.5));
  endfunction

  // stream of a (layer, side, strip)
  function automatic int stream_of(input int layer, input int side, input int strip);
    if (layer == 1) return side;
    if (layer == 2) return 2 + side;
    return (strip <= 48 ? 4 : 6) + side;
  endfunction

  // ------------------------------------------------------------------ packet model
  typedef struct { int t; int ch; int lead; } edge_t;
  typedef bit [31:0] words_t [$];
  words_t pkt_q [N_CH][$];            // packets waiting to be sent, per stream
  words_t sent_pkt [int];              // key ts*8+ch
  int exp_pts [int];                   // expected number of points per timeslot
  real exp_x [int], exp_y [int], exp_z [int];
  int ts_wrap = 0;

  // calibrated time of a coarse/fine pair, as the fine calibration defines it
  function automatic int fine_ps(input int fine);
    return (fine * 49113) >>> 12;
  endfunction

  // Encode an edge at about t ps after the reference; returns the time the chain will see.
  function automatic int encode(input longint ref_ct, input int t, output longint ct, output int fine);
    longint c = ref_ct + (t + 4999) / 5000;
    int fps = int'(c - ref_ct) * 5000 - t;
    fine = (fps * 4096 + 24556) / 49113;
    if (fine > 1023) fine = 1023;
    ct = c;
    return int'(c - ref_ct) * 5000 - fine_ps(fine);
  endfunction

  // Build the eight packets of one timeslot from a list of edges per stream
  task automatic build_ts(input int ts, input longint ref_ct, ref edge_t edges [N_CH][$]);
    for (int c = 0; c < N_CH; c++) begin
      words_t w;
      w.push_back(32'(ts));
      for (int ep = 0; ep < N_EP; ep++) begin
        words_t d;
        longint last_epoch = ref_ct >> 11;
        edge_t es [$];
        foreach (edges[c][i]) if (edges[c][i].ch / 48 == ep) es.push_back(edges[c][i]);
        es.sort(e) with (e.t);
        d.push_back({3'b011, 1'b0, 28'(ref_ct >> 11)});
        d.push_back({1'b1, 2'b00, 7'd0, 10'd0, 1'b1, 11'(ref_ct & 2047)});
        foreach (es[i]) begin
          longint ct; int fine, tt;
          tt = encode(ref_ct, es[i].t, ct, fine);
          if ((ct >> 11) != last_epoch) begin
            d.push_back({3'b011, 1'b0, 28'(ct >> 11)});
            last_epoch = ct >> 11;
          end
          d.push_back({1'b1, 2'b00, 7'(es[i].ch % 48 + 1), 10'(fine), 1'(es[i].lead), 11'(ct & 2047)});
        end
        w.push_back({16'h0100 + 16'(c * 16 + ep), 16'(d.size())});
        foreach (d[i]) w.push_back(d[i]);
        if (ep == 1) begin   // foreign device subevent
          w.push_back({16'h7777, 16'd2});
          w.push_back(32'h8000_1234);
          w.push_back(32'h8000_5678);
        end
      end
      pkt_q[c].push_back(w);
      sent_pkt[ts * 8 + c] = w;
    end
  endtask

  // add one hit on all four thresholds, returns the chain's leading time of thr 0
  function automatic int add_hit(ref edge_t edges [N_CH][$], input longint ref_ct,
                                 input int layer, input int side, input int strip, input int t);
    int c = stream_of(layer, side, strip);
    int s = (strip - 1) % 48;
    longint ct; int fine, tt;
    for (int thr = 0; thr < 4; thr++) begin
      edges[c].push_back('{t: t + 300 * thr, ch: s * 4 + thr, lead: 1});
      edges[c].push_back('{t: t + 9000 - 500 * thr, ch: s * 4 + thr, lead: 0});
    end
    tt = encode(ref_ct, t, ct, fine);
    return tt;
  endfunction

  task automatic make_ts(input int ts, input bit with_lor, input bit wrap);
    edge_t edges [N_CH][$];
    longint ref_ct = wrap ? ((longint'(77) << 11) + 2047 - 50) : ((longint'(77) << 11) + 100);
    int nnoise = $urandom_range(1, 6);
    if (wrap) ts_wrap++;
    if (with_lor) begin
      int tb = $urandom_range(0, 31);
      int t0 = tb * 625000 + 150000 + $urandom_range(0, 300000);
      int l1 = $urandom_range(1, 2);
      int s1 = $urandom_range(1, 48);
      int s2 = $urandom_range(1, 96);
      int tof = $urandom_range(0, 3000) - 1500;
      int d1 = $urandom_range(0, 3000) - 1500, d2 = $urandom_range(0, 3000) - 1500;
      int ta1, tb1, ta2, tb2, x1, y1, x2, y2;
      real ts1, ts2, z1, z2, dx, dy, dz, len, sv, f;
      ta1 = add_hit(edges, ref_ct, l1, 0, s1, t0 - d1);
      tb1 = add_hit(edges, ref_ct, l1, 1, s1, t0 + d1);
      ta2 = add_hit(edges, ref_ct, 3, 0, s2, t0 + tof - d2);
      tb2 = add_hit(edges, ref_ct, 3, 1, s2, t0 + tof + d2);
      strip_xy(l1, s1, x1, y1);
      strip_xy(3, s2, x2, y2);
      ts1 = (ta1 + tb1) / 2.0; ts2 = (ta2 + tb2) / 2.0;
      z1 = (tb1 - ta1) * 0.063; z2 = (tb2 - ta2) * 0.063;
      dx = x1 - x2; dy = y1 - y2; dz = z1 - z2;
      len = $sqrt(dx * dx + dy * dy + dz * dz);
      sv = 0.1499 * (ts2 - ts1);
      f = sv / len;
      if (f > 0.5) f = 0.5;
      if (f < -0.5) f = -0.5;
      exp_x[ts] = (x1 + x2) / 2.0 + dx * f;
      exp_y[ts] = (y1 + y2) / 2.0 + dy * f;
      exp_z[ts] = (z1 + z2) / 2.0 + dz * f;
      exp_pts[ts] = 1;
    end else begin
      exp_pts[ts] = 0;
    end
    for (int n = 0; n < nnoise; n++) begin
      int c = 2 * $urandom_range(0, 3);        // side A streams only: never coincident
      int s = $urandom_range(0, 47);
      int t = $urandom_range(0, 31) * 625000 + 100000 + $urandom_range(0, 400000);
      edges[c].push_back('{t: t, ch: s * 4, lead: 1});
      edges[c].push_back('{t: t + 7000, ch: s * 4, lead: 0});
    end
    build_ts(ts, ref_ct, edges);
  endtask

  // ------------------------------------------------------------------ byte drivers
  for (genvar c = 0; c < N_CH; c++) begin : g_drv
    initial begin
      rx_valid[c] = 0; rx_last[c] = 0; rx_byte[c] = 0;
      wait (rst_rx_n);
      forever begin
        @(posedge clk_rx);
        if (pkt_q[c].size() > 0) begin
          automatic words_t w = pkt_q[c].pop_front();
          repeat ($urandom_range(0, 40)) @(posedge clk_rx);
          foreach (w[i]) for (int b = 3; b >= 0; b--) begin
            #0.1;
            rx_valid[c] = 1;
            rx_byte[c]  = w[i][8*b +: 8];
            rx_last[c]  = (i == w.size() - 1) && (b == 0);
            @(posedge clk_rx);
          end
          #0.1;
          rx_valid[c] = 0; rx_last[c] = 0;
        end
      end
    end
  end

  // ------------------------------------------------------------------ monitors
  int n_points = 0, n_lm = 0, n_raw = 0, n_stall = 0, n_ts_seen = 0;
  int got_pts [int];
  int cur_ts_done;
  // ROR point stream: tagged with the timeslot being finished by the dispatcher
  always @(posedge clk) if (rst_n && ror_valid) begin
    automatic int ts = int'(dut.u_disp.ts_done_num);
    n_points++;
    if (!exp_pts.exists(ts) || exp_pts[ts] == 0) check(0, $sformatf("unexpected point in ts %0d", ts));
    else begin
      automatic real ex = exp_x[ts], ey = exp_y[ts], ez = exp_z[ts];
      check(rabs(real'(ror_point.x) - ex) <= 4.0 && rabs(real'(ror_point.y) - ey) <= 4.0 &&
            rabs(real'(ror_point.z) - ez) <= 4.0,
            $sformatf("ts %0d point (%0d,%0d,%0d) exp (%.1f,%.1f,%.1f)", ts,
                      ror_point.x, ror_point.y, ror_point.z, ex, ey, ez));
    end
    got_pts[ts] = got_pts.exists(ts) ? got_pts[ts] + 1 : 1;
  end

  // output stream
  words_t cur_pkt;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) n_stall++;
    if (out_valid && out_ready) begin
      cur_pkt.push_back(out_data);
      if (out_last) begin
        if (out_src == 4'd8) begin
          automatic int ts = int'(cur_pkt[1]);
          n_lm++;
          check(cur_pkt[0][31:16] == 16'hA500, "list-mode header");
          check(exp_pts.exists(ts) && cur_pkt[0][15:0] == 16'(exp_pts[ts]) && exp_pts[ts] > 0,
                $sformatf("list-mode count for ts %0d", ts));
          check(cur_pkt.size() == 2 + 2 * int'(cur_pkt[0][15:0]), "list-mode length");
          if (exp_pts.exists(ts) && exp_pts[ts] > 0 && cur_pkt.size() >= 4)
            check(rabs(real'($signed(cur_pkt[2][31:16])) - exp_x[ts]) <= 4.0 &&
                  rabs(real'($signed(cur_pkt[2][15:0])) - exp_y[ts]) <= 4.0 &&
                  rabs(real'($signed(cur_pkt[3][31:16])) - exp_z[ts]) <= 4.0, "list-mode point");
        end else begin
          automatic int key = int'(cur_pkt[0]) * 8 + int'(out_src);
          n_raw++;
          check(sent_pkt.exists(key) && sent_pkt[key] == cur_pkt,
                $sformatf("raw packet ts %0d stream %0d", cur_pkt[0], out_src));
        end
        cur_pkt.delete();
      end
    end
  end

  always @(posedge clk) out_ready <= ($urandom_range(0, 7) != 0);

  task automatic cfg_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, addr: a, data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic wait_quiet(input int n_ts);
    int idle = 0;
    while (idle < 400) begin
      @(posedge clk);
      if (ts_count >= 32'(n_ts) && dut.u_disp.st_q == 0 && !out_valid && !ror_valid) idle++;
      else idle = 0;
    end
  endtask

  // ------------------------------------------------------------------ stimulus
  localparam int N1 = 14, N2 = 6;
  int n_lor = 0, n_empty = 0;
  initial begin
    cfg = '0;
    #20 rst_rx_n = 1; rst_n = 1;
    cfg_write(REG_MODE, 32'd1);              // list-mode output
    for (int ts = 0; ts < N1; ts++) begin
      automatic bit lor = (ts % 4 != 3);
      make_ts(ts, lor, ts % 5 == 1);
    end
    wait_quiet(N1);
    check(lm_pkt_count == 32'(N1 - N1 / 4), $sformatf("list-mode packets %0d", lm_pkt_count));
    cfg_write(REG_MODE, 32'd0);              // switch to raw data output
    for (int ts = N1; ts < N1 + N2; ts++) make_ts(ts, ts % 2 == 0, ts == N1 + 1);
    wait_quiet(N1 + N2);
    // per-timeslot point counts
    foreach (exp_pts[ts]) begin
      automatic int g = got_pts.exists(ts) ? got_pts[ts] : 0;
      check(g == exp_pts[ts], $sformatf("ts %0d points %0d exp %0d", ts, g, exp_pts[ts]));
      if (exp_pts[ts] > 0) n_lor++; else n_empty++;
    end
    check(ts_count == 32'(N1 + N2), "timeslot count");
    check(mismatch_count == 0, "timeslot numbers aligned");
    check(rx_overflow == '0, "no receiver overflow");
    check(n_raw == N2 * N_CH, $sformatf("raw packets %0d", n_raw));
    $display("mechanisms: lor_ts=%0d empty_ts=%0d lm_pkts=%0d raw_pkts=%0d epoch_wrap_ts=%0d rejected=%0d noise=%0d stalls=%0d",
             n_lor, n_empty, n_lm, n_raw, ts_wrap, dut.g_ch[0].u_ch.ep_reject_count,
             dut.u_disp.noise_count, n_stall);
    check(n_lor > 0, "mechanism: LOR timeslot");
    check(n_empty > 0, "mechanism: timeslot without LOR");
    check(n_lm > 0, "mechanism: list-mode packet");
    check(n_raw > 0, "mechanism: raw packet (mode switch)");
    check(ts_wrap > 0, "mechanism: epoch wrap");
    check(dut.g_ch[0].u_ch.ep_reject_count > 0, "mechanism: foreign device rejected");
    check(dut.u_disp.noise_count > 0, "mechanism: noise hits dropped");
    check(n_stall > 0, "mechanism: output back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
