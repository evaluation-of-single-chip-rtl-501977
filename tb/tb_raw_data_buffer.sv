`timescale 1ns/1ps
// tb_raw_data_buffer: words written without back-pressure must read back in order with
// their `last` flags; pkt_avail must be set exactly while a complete packet is held;
// words that find the buffer full are dropped and counted.
module tb_raw_data_buffer;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic in_valid, in_last, out_last, out_valid, out_ready, pkt_avail;
  logic [31:0] in_data, out_data; logic [15:0] drop_count;
  int checks = 0, failures = 0, pkts = 0;
  raw_data_buffer #(.DEPTH(32)) dut (.*);
  bit [32:0] exp_q [$];
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0 && exp_q[0] == {out_last, out_data}, "data order");
      if (exp_q.size()) void'(exp_q.pop_front());
    end
  end
  initial begin
    in_valid = 0; in_last = 0; in_data = 0; out_ready = 0;
    #12 rst_n = 1;
    for (int p = 0; p < 30; p++) begin
      automatic int n = $urandom_range(1, 6);
      for (int i = 0; i < n; i++) begin
        @(negedge clk); in_valid = 1; in_data = $urandom; in_last = (i == n - 1);
        exp_q.push_back({in_last, in_data});
        @(negedge clk); in_valid = 0;
        check(pkt_avail == (i == n - 1), "pkt_avail follows complete packet");
      end
      @(negedge clk); out_ready = 1;
      wait (exp_q.size() == 0); @(negedge clk); out_ready = 0;
      check(!pkt_avail && !out_valid, "empty after drain");
    end
    // overflow: 40 words into 32 entries
    for (int i = 0; i < 40; i++) begin
      @(negedge clk); in_valid = 1; in_data = i; in_last = 0;
    end
    @(negedge clk); in_valid = 0;
    check(drop_count == 16'd8, $sformatf("drop count %0d", drop_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
