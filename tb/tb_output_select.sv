`timescale 1ns/1ps
// tb_output_select: model raw buffers hold whole packets (word = {src, pkt, idx});
// a model list-mode source offers packets. In raw mode every raw packet must leave
// whole, with out_src naming its buffer, and list-mode packets are discarded; after
// switching to list-mode every list-mode packet leaves whole and raw packets are
// discarded. Packets must never be cut or interleaved. Output back-pressure is random.
module tb_output_select;
  import jpet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic mode;
  logic [31:0] raw_data [N_CH]; logic [N_CH-1:0] raw_last, raw_valid, raw_pkt_avail, raw_ready;
  logic [31:0] lm_data; logic lm_valid, lm_last, lm_ready;
  logic [31:0] out_data; logic out_last, out_valid, out_ready; logic [3:0] out_src;
  logic [31:0] raw_pkts, lm_pkts;
  int checks = 0, failures = 0;
  output_select dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  bit [31:0] rq [N_CH][$];     // raw words; packet length 4 each
  bit [31:0] lq [$];
  int raw_seen = 0, lm_seen = 0, idx = 0, cur_src = -1;
  bit [31:0] prev;
  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      raw_valid[c]     = rq[c].size() != 0;
      raw_data[c]      = rq[c].size() ? rq[c][0] : '0;
      raw_last[c]      = rq[c].size() ? (rq[c][0][1:0] == 2'd3) : 1'b0;
      raw_pkt_avail[c] = rq[c].size() >= 4;
    end
    lm_valid = lq.size() != 0;
    lm_data  = lq.size() ? lq[0] : '0;
    lm_last  = lq.size() ? (lq[0][1:0] == 2'd3) : 1'b0;
  end
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N_CH; c++) if (raw_ready[c] && raw_valid[c]) void'(rq[c].pop_front());
    if (lm_ready && lm_valid) void'(lq.pop_front());
    if (out_valid && out_ready) begin
      if (idx == 0) cur_src = out_src;
      check(out_src == 4'(cur_src), "no interleave");
      check(out_data[1:0] == 2'(idx), "packet whole");
      check(out_src == 8 ? out_data[31:28] == 4'h8 : out_data[31:28] == 4'(out_src), "source");
      check(out_last == (idx == 3), "last");
      idx = out_last ? 0 : idx + 1;
      if (out_last) begin if (out_src == 8) lm_seen++; else raw_seen++; end
    end
    out_ready <= ($urandom_range(0, 3) != 0);
  end
  task automatic add_pkts(input int n);
    for (int p = 0; p < n; p++) begin
      automatic int c = $urandom_range(0, N_CH);
      @(negedge clk);
      for (int w = 0; w < 4; w++)
        if (c == N_CH) lq.push_back({4'h8, 12'(p), 14'd0, 2'(w)});
        else rq[c].push_back({4'(c), 12'(p), 14'd0, 2'(w)});
    end
  endtask
  initial begin
    mode = 0; out_ready = 1;
    #12 rst_n = 1;
    add_pkts(60);
    repeat (600) @(negedge clk);
    check(raw_seen > 20 && lm_seen == 0, $sformatf("raw mode: raw %0d lm %0d", raw_seen, lm_seen));
    check(raw_pkts == 32'(raw_seen), "raw packet counter");
    for (int c = 0; c < N_CH; c++) check(rq[c].size() == 0, "raw drained");
    check(lq.size() == 0, "list-mode discarded in raw mode");
    mode = 1; raw_seen = 0;
    add_pkts(60);
    repeat (600) @(negedge clk);
    check(lm_seen > 0 && raw_seen == 0, $sformatf("list-mode: raw %0d lm %0d", raw_seen, lm_seen));
    check(lm_pkts == 32'(lm_seen), "list-mode packet counter");
    for (int c = 0; c < N_CH; c++) check(rq[c].size() == 0, "raw discarded in list-mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
