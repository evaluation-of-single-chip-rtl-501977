`timescale 1ns/1ps
// tb_coinc_search: random timeslots through the coincidence search.
// Hits are drawn at random (stream, strip, timebin, threshold); a reference model in
// the testbench builds the same arrays and computes, per timebin, whether two or more
// strips have both sides hit. The result must match and must appear exactly 5 clock
// edges after the edge that samples ts_end (25 ns at 200 MHz).
module tb_coinc_search;
  import jpet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic [N_CH-1:0] in_valid;
  hit_t in_hit [N_CH];
  logic ts_end;
  logic [31:0] ts_num;
  logic res_valid, lor_found;
  logic [31:0] res_ts, found_count;
  logic [N_TB-1:0] tb_mask;
  logic [N_STRIP-1:0] strip_coinc [N_PAIR][N_TB];
  int checks = 0, failures = 0;

  coinc_search dut (.*);

  logic [N_STRIP-1:0] ref_arr [N_CH][N_TB];
  logic [N_TB-1:0] ref_mask;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = '0; ts_end = 0; ts_num = 0;
    for (int c = 0; c < N_CH; c++) in_hit[c] = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int ts = 0; ts < 60; ts++) begin
      automatic int nh = (ts % 3 == 0) ? 2 : 6 + $urandom_range(0, 20);
      for (int c = 0; c < N_CH; c++) for (int b = 0; b < N_TB; b++) ref_arr[c][b] = '0;
      for (int k = 0; k < nh; k++) begin
        @(negedge clk);
        in_valid = '0;
        for (int c = 0; c < N_CH; c++) begin
          if ($urandom_range(0, 3) == 0) begin
            automatic int s = $urandom_range(0, (ts % 2) ? 3 : 47);
            automatic int b = $urandom_range(0, (ts % 2) ? 1 : 31);
            in_valid[c] = 1;
            in_hit[c] = '0;
            in_hit[c].thr = ($urandom_range(0, 4) == 0) ? 2'd1 : 2'd0;
            in_hit[c].tdc_ch = 8'(s * 4) + 8'(in_hit[c].thr);
            in_hit[c].t = time_t'(b * TIMEBIN_PS + $urandom_range(0, TIMEBIN_PS - 1));
            if (in_hit[c].thr == 0) ref_arr[c][b][s] = 1'b1;
          end
        end
      end
      // the last hits arrive in the same cycle as ts_end
      @(negedge clk);
      in_valid = '0;
      in_valid[0] = 1; in_hit[0] = '0; in_hit[0].tdc_ch = 8'd0; in_hit[0].t = 25'd0;
      in_valid[1] = 1; in_hit[1] = '0; in_hit[1].tdc_ch = 8'd0; in_hit[1].t = 25'd0;
      ref_arr[0][0][0] = 1; ref_arr[1][0][0] = 1;
      ts_end = 1; ts_num = 32'(1000 + ts);
      @(posedge clk); #0.1;
      in_valid = '0; ts_end = 0;
      // reference
      for (int b = 0; b < N_TB; b++) begin
        automatic int cnt = 0;
        for (int p = 0; p < N_PAIR; p++)
          for (int s = 0; s < N_STRIP; s++)
            if (ref_arr[2*p][b][s] && ref_arr[2*p+1][b][s]) cnt++;
        ref_mask[b] = (cnt >= 2);
      end
      for (int e = 1; e <= 5; e++) begin
        check(res_valid == (e == 5), $sformatf("res_valid timing edge %0d", e));
        if (e < 5) @(posedge clk); #0.1;
      end
      check(tb_mask == ref_mask, $sformatf("ts %0d mask %h exp %h", ts, tb_mask, ref_mask));
      check(lor_found == (ref_mask != 0), "lor_found");
      check(res_ts == 32'(1000 + ts), "res_ts");
      check(strip_coinc[0][0][0] == 1'b1, "strip coincidence array bit");
      @(posedge clk); #0.1;
      check(!res_valid, "single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
