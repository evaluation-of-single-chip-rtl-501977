`timescale 1ns/1ps
// tb_tdc_parser: random timeslots of TRB3 words for the four endpoints (epoch word,
// reference hit on channel 0, leading and trailing edges, epoch words on coarse wrap).
// Calibration registers (fine minimum, fine scale, channel offsets) are written with
// random values first. Expected hit time and width are computed in the testbench
// from the TDC time definition; leading edges outside 0..20 us must be dropped, and
// out_end must follow in_end by exactly 3 cycles.
module tb_tdc_parser;
  import jpet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  cfg_wr_t cfg;
  logic in_valid, in_end, out_valid, out_end;
  logic [31:0] in_word; logic [1:0] in_ep;
  logic [7:0] out_tdc_ch; time_t out_t; logic [WIDTH_W-1:0] out_width; logic [15:0] drop_count;
  int checks = 0, failures = 0;
  tdc_parser #(.CH_IDX(3'd5)) dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int fmin, fscale;
  int offs [192];
  typedef struct { int ch; longint t; int w; } exp_t;
  exp_t exp_q [$];
  int end_at = -1, cyc = 0, since = 100;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      check(exp_q.size() > 0 && exp_q[0].ch == out_tdc_ch && exp_q[0].t == out_t && exp_q[0].w == out_width,
            $sformatf("hit ch %0d t %0d w %0d exp ch %0d t %0d w %0d", out_tdc_ch, out_t, out_width,
                      exp_q.size() ? exp_q[0].ch : -1, exp_q.size() ? exp_q[0].t : 0, exp_q.size() ? exp_q[0].w : 0));
      if (exp_q.size()) void'(exp_q.pop_front());
    end
    if (out_end) check(since == 2, $sformatf("out_end 3 cycles after in_end (%0d)", since));
    if (in_end) since = 0; else since++;
  end
  function automatic longint fps(input int f);
    longint p = (f > fmin) ? longint'(f - fmin) * fscale : 0;
    p = p >>> 12;
    return p > 8191 ? 8191 : p;
  endfunction
  task automatic put(input bit [31:0] w, input int ep);
    @(negedge clk); in_valid = 1; in_word = w; in_ep = 2'(ep);
    @(negedge clk); in_valid = 0;
  endtask
  task automatic cfg_w(input int a, input int d);
    @(negedge clk); cfg = '{we: 1'b1, addr: 16'(a), data: 32'(d)}; @(negedge clk); cfg = '0;
  endtask
  initial begin
    cfg = '0; in_valid = 0; in_end = 0; in_word = 0; in_ep = 0;
    #12 rst_n = 1;
    fmin = $urandom_range(5, 30); fscale = $urandom_range(40000, 60000);
    cfg_w(16'h1000 + 5 * 16'h200 + 16'h100, fmin);
    cfg_w(16'h1000 + 5 * 16'h200 + 16'h101, fscale);
    cfg_w(16'h1000 + 4 * 16'h200 + 16'h101, 1);   // other stream: must not apply
    for (int n = 0; n < 192; n++) begin
      offs[n] = $urandom_range(0, 2000) - 1000;
      cfg_w(16'h1000 + 5 * 16'h200 + n, offs[n] & 16'hFFFF);
    end
    for (int ts = 0; ts < 30; ts++) begin
      for (int ep = 0; ep < 4; ep++) begin
        automatic longint ref_ct = (longint'($urandom_range(1, 1000)) << 11) + $urandom_range(0, 2047);
        automatic int rf = $urandom_range(0, 500);
        automatic longint last_ep = ref_ct >> 11;
        // hit before the reference: dropped
        put({1'b1, 2'b0, 7'd3, 10'd100, 1'b1, 11'd5}, ep);
        put({3'b011, 1'b0, 28'(ref_ct >> 11)}, ep);
        put({1'b1, 2'b0, 7'd0, 10'(rf), 1'b1, 11'(ref_ct & 2047)}, ep);
        for (int h = 0; h < 6; h++) begin
          automatic int ch = $urandom_range(1, 48);
          automatic longint ct = ref_ct + ((h == 5 && ts % 3 == 0) ? 4100 : $urandom_range(1, 3900));
          automatic int f1 = $urandom_range(0, 500), f2 = $urandom_range(0, 500);
          automatic longint ct2 = ct + $urandom_range(1, 10);
          automatic int n = ep * 48 + ch - 1;
          automatic longint t1 = (ct - ref_ct) * 5000 - fps(f1) + fps(rf) + offs[n];
          automatic longint t2 = (ct2 - ref_ct) * 5000 - fps(f2) + fps(rf) + offs[n];
          if ((ct >> 11) != last_ep) begin put({3'b011, 1'b0, 28'(ct >> 11)}, ep); last_ep = ct >> 11; end
          put({1'b1, 2'b0, 7'(ch), 10'(f1), 1'b1, 11'(ct & 2047)}, ep);
          if ((ct2 >> 11) != last_ep) begin put({3'b011, 1'b0, 28'(ct2 >> 11)}, ep); last_ep = ct2 >> 11; end
          put({1'b1, 2'b0, 7'(ch), 10'(f2), 1'b0, 11'(ct2 & 2047)}, ep);
          if (t1 >= 0 && t1 < 20000000) exp_q.push_back('{ch: n, t: t1, w: (t2 - t1 < 0) ? 0 : int'(t2 - t1)});
          repeat (3) @(negedge clk);
        end
      end
      @(negedge clk); in_end = 1; end_at = cyc; @(negedge clk); in_end = 0;
      repeat (5) @(negedge clk);
      check(exp_q.size() == 0, $sformatf("all hits out, %0d left, ch %0d t %0d", exp_q.size(), exp_q.size() ? exp_q[0].ch : 0, exp_q.size() ? exp_q[0].t : 0));
    end
    check(drop_count > 0, "drops counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
