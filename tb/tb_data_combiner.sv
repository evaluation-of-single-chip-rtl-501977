`timescale 1ns/1ps
// tb_data_combiner: `go` must be issued once, only when all eight channels hold data
// and the pipelines downstream are ready; hits of each lane must appear on the bus one
// cycle later; ts_end must pulse once, one cycle after the last channel's end, with the
// timeslot number, and a channel reporting another number must raise ts_mismatch.
module tb_data_combiner;
  import jpet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic [N_CH-1:0] data_avail, ts_valid, in_valid, in_end, bus_valid;
  logic downstream_ready, go, ts_end, ts_mismatch;
  logic [31:0] ts_num [N_CH]; hit_t in_hit [N_CH]; hit_t bus_hit [N_CH];
  logic [31:0] ts_end_num, ts_count; logic [15:0] mismatch_count;
  int checks = 0, failures = 0, n_go = 0;
  data_combiner dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (go) n_go++;
  initial begin
    data_avail = '0; ts_valid = '0; in_valid = '0; in_end = '0; downstream_ready = 0;
    for (int c = 0; c < N_CH; c++) begin ts_num[c] = 0; in_hit[c] = '0; end
    #12 rst_n = 1;
    for (int ts = 0; ts < 20; ts++) begin
      automatic bit bad = (ts % 7 == 6);
      // channels become ready one by one; downstream held back for a while
      for (int c = 0; c < N_CH; c++) begin
        @(negedge clk); data_avail[c] = 1;
        @(posedge clk); #0.1; check(go == 0, "no go before all channels");
      end
      repeat (3) begin @(posedge clk); #0.1; check(go == 0, "no go before downstream ready"); end
      @(negedge clk); downstream_ready = 1;
      @(posedge clk); #0.1; check(go == 1, "go");
      @(negedge clk); data_avail = '0;
      @(posedge clk); #0.1; check(go == 0, "go single pulse");
      @(negedge clk);
      for (int c = 0; c < N_CH; c++) ts_num[c] = (bad && c == 5) ? 32'(ts + 99) : 32'(ts);
      ts_valid = '1; @(negedge clk); ts_valid = '0;
      for (int k = 0; k < 10; k++) begin
        automatic logic [N_CH-1:0] v = N_CH'($urandom);
        for (int c = 0; c < N_CH; c++) in_hit[c].t = time_t'($urandom);
        in_valid = v;
        in_end = (k >= 5) ? N_CH'(1) << (k - 5) : '0;
        if (k == 9) in_end = 8'b1111_0000;
        @(posedge clk); #0.1;
        check(bus_valid == v, "bus valid");
        for (int c = 0; c < N_CH; c++) check(!v[c] || bus_hit[c].t == in_hit[c].t, "bus hit");
        check(ts_end == (k == 9), "ts_end after last channel end");
        if (ts_end) begin
          check(ts_end_num == 32'(ts), "ts number");
          check(ts_mismatch == bad, "mismatch flag");
        end
        @(negedge clk);
      end
      in_valid = '0; in_end = '0; downstream_ready = 0;
    end
    check(n_go == 20, "one go per timeslot");
    check(ts_count == 20 && mismatch_count == 16'd2, "counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
