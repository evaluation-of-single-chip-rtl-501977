`timescale 1ns/1ps
// tb_trb_parser: random packets (timeslot number, subevents of random device and
// length, some empty) are offered with random gaps; the parser must report the
// timeslot number, every data word with its device ID in order, and one out_end per
// packet, and must not read before `go`.
module tb_trb_parser;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic go, busy, in_last, in_valid, in_ready, consumed, ts_valid, out_valid, out_end;
  logic [31:0] in_data, ts_num, out_word; logic [15:0] out_dev;
  int checks = 0, failures = 0, n_end = 0;
  trb_parser dut (.*);
  bit [47:0] exp_q [$];
  bit [31:0] exp_ts;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin #200us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      check(exp_q.size() > 0 && exp_q[0] == {out_dev, out_word}, "data word and device");
      if (exp_q.size()) void'(exp_q.pop_front());
    end
    if (ts_valid) check(ts_num == exp_ts, "timeslot number");
    if (out_end) n_end++;
  end
  initial begin
    bit [31:0] pk [$];
    go = 0; in_valid = 0; in_last = 0; in_data = 0;
    #12 rst_n = 1;
    for (int p = 0; p < 40; p++) begin
      automatic int ns = $urandom_range(0, 4);
      pk.delete();
      exp_ts = $urandom; pk.push_back(exp_ts);
      for (int s = 0; s < ns; s++) begin
        automatic bit [15:0] dev = $urandom;
        automatic int n = $urandom_range(0, 5);
        pk.push_back({dev, 16'(n)});
        for (int i = 0; i < n; i++) begin
          automatic bit [31:0] w = $urandom;
          pk.push_back(w); exp_q.push_back({dev, w});
        end
      end
      @(negedge clk); in_valid = 1; in_data = pk[0]; in_last = (pk.size() == 1);
      repeat (3) begin @(negedge clk); check(!consumed, "no read before go"); end
      go = 1; @(negedge clk); go = 0;
      for (int i = 0; i < pk.size(); i++) begin
        in_valid = ($urandom_range(0, 3) != 0);
        while (!in_valid) begin @(negedge clk); in_valid = ($urandom_range(0, 3) != 0); end
        in_data = pk[i]; in_last = (i == pk.size() - 1);
        @(posedge clk); #0.1;
        @(negedge clk);
      end
      in_valid = 0;
      repeat (3) @(negedge clk);
      check(exp_q.size() == 0, "all words out");
      check(n_end == p + 1, "one end per packet");
      check(!busy, "idle after packet");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
