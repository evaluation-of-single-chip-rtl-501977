`timescale 1ns/1ps
// tb_ror_dispatcher: random hits on the eight lanes (all thresholds) followed by
// ts_end and a random timebin mask. A model of the 32 processors with random
// back-pressure records what each receives. Every lowest-threshold hit whose timebin
// is in the mask must reach exactly the processor of its timebin, in buffer order,
// all other hits must be dropped and counted, flush must follow the last hit, and
// ts_done (with the timeslot number) must wait for pipe_empty.
module tb_ror_dispatcher;
  import jpet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic [N_CH-1:0] in_valid; hit_t in_hit [N_CH];
  logic ts_end, res_valid, can_accept, flush, pipe_empty, ts_done;
  logic [31:0] res_ts, ts_done_num, pass_count, noise_count; logic [N_TB-1:0] res_mask;
  logic [N_TB-1:0] proc_valid, proc_ready, proc_idle; hit_t proc_hit; logic [15:0] overflow_count;
  int checks = 0, failures = 0;
  ror_dispatcher #(.HIT_DEPTH(64)) dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  time_t exp_q [N_TB][$];
  int got_after_flush = 0, n_flush = 0;
  bit flushed;
  always @(posedge clk) proc_ready <= N_TB'($urandom) | N_TB'($urandom);
  always @(posedge clk) if (rst_n) begin
    if (|proc_valid) begin
      automatic int b = $clog2(proc_valid);
      if (proc_ready[b]) begin
        check(timebin_of(proc_hit.t) == 5'(b), "routed to own timebin");
        check(exp_q[b].size() > 0 && exp_q[b][0] == proc_hit.t, $sformatf("hit order tb %0d", b));
        if (exp_q[b].size()) void'(exp_q[b].pop_front());
        if (flushed) got_after_flush++;
      end
    end
    if (flush) begin flushed = 1; n_flush++; end
  end
  initial begin
    int n_noise;
    in_valid = '0; ts_end = 0; res_valid = 0; res_ts = 0; res_mask = 0; proc_idle = '1; pipe_empty = 1;
    for (int c = 0; c < N_CH; c++) in_hit[c] = '0;
    #12 rst_n = 1;
    n_noise = 0;
    for (int ts = 0; ts < 25; ts++) begin
      automatic logic [N_TB-1:0] mask = N_TB'($urandom) & N_TB'($urandom);
      time_t hq [N_CH][$];
      for (int c = 0; c < N_CH; c++) hq[c].delete();
      flushed = 0;
      wait (can_accept);
      for (int k = 0; k < 12; k++) begin
        @(negedge clk);
        in_valid = N_CH'($urandom);
        for (int c = 0; c < N_CH; c++) begin
          in_hit[c] = '0;
          in_hit[c].t = time_t'($urandom_range(0, TIMESLOT_PS - 1));
          in_hit[c].thr = ($urandom_range(0, 3) == 0) ? 2'd2 : 2'd0;
          if (in_valid[c] && in_hit[c].thr == 0) hq[c].push_back(in_hit[c].t);
        end
      end
      @(negedge clk); in_valid = '0; ts_end = 1; @(negedge clk); ts_end = 0;
      for (int c = 0; c < N_CH; c++) foreach (hq[c][i]) begin
        if (mask[timebin_of(hq[c][i])]) exp_q[timebin_of(hq[c][i])].push_back(hq[c][i]);
        else n_noise++;
      end
      repeat (4) @(negedge clk);
      res_valid = 1; res_ts = 32'(500 + ts); res_mask = mask; @(negedge clk); res_valid = 0;
      wait (flush); @(negedge clk);
      for (int b = 0; b < N_TB; b++) check(exp_q[b].size() == 0, "all qualified hits delivered before flush");
      check(got_after_flush == 0, "no hit after flush");
      // processors busy, then output still draining
      proc_idle = '0; pipe_empty = 0;
      repeat (10) begin @(negedge clk); check(!ts_done, "ts_done waits"); end
      proc_idle = '1;
      repeat (5) begin @(negedge clk); check(!ts_done, "ts_done waits for pipe"); end
      pipe_empty = 1;
      @(posedge clk); #0.1;
      check(ts_done && ts_done_num == 32'(500 + ts), "ts_done with number");
    end
    check(n_flush == 25, "one flush per timeslot");
    check(noise_count == 32'(n_noise), $sformatf("noise count %0d exp %0d", noise_count, n_noise));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
