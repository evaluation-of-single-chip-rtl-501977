`timescale 1ns/1ps
// tb_ror_packager: eight model FIFOs are filled with tagged points at random; the
// packager must deliver every point exactly once, in FIFO order per source, with
// out_src naming the source, under random output back-pressure, and must visit the
// sources in round-robin order (no source waits more than N_IN cycles while the
// output is free).
module tb_ror_packager;
  import jpet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  localparam int N = 8;
  logic [N-1:0] in_empty, in_pop; ror_point_t in_point [N];
  logic out_valid, out_ready, busy; ror_point_t out_point; logic [2:0] out_src;
  int checks = 0, failures = 0;
  ror_packager #(.N_IN(N)) dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  ror_point_t q [N][$];
  int next_exp [N];
  int wait_cnt [N];
  int total = 0;
  always_comb for (int i = 0; i < N; i++) begin
    in_empty[i] = (q[i].size() == 0);
    in_point[i] = q[i].size() ? q[i][0] : '0;
  end
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (in_pop[i]) void'(q[i].pop_front());
    if (out_valid && out_ready) begin
      check(out_point.x == 16'(out_src) && out_point.y == 16'(next_exp[out_src]), "order and source");
      next_exp[out_src]++;
      total--;
    end
    for (int i = 0; i < N; i++) begin
      if (!in_empty[i] && !out_valid && !in_pop[i]) wait_cnt[i]++;
      else wait_cnt[i] = 0;
      check(wait_cnt[i] <= N, "round-robin service");
    end
    out_ready <= ($urandom_range(0, 2) != 0);
  end
  initial begin
    int seq [N];
    for (int i = 0; i < N; i++) begin seq[i] = 0; next_exp[i] = 0; wait_cnt[i] = 0; end
    out_ready = 1;
    #12 rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      if ($urandom_range(0, 1)) begin
        automatic int i = $urandom_range(0, N - 1);
        q[i].push_back('{x: 16'(i), y: 16'(seq[i]), z: 16'h55});
        seq[i]++; total++;
      end
    end
    repeat (200) @(negedge clk);
    check(total == 0, "all points delivered");
    check(!busy, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
