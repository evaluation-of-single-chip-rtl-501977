`timescale 1ns/1ps
// tb_listmode_builder: points arrive from four packagers at random; at ts_done the
// packet must be {A5,00,n}, timeslot, then x/y and z words of every point, with
// `last` on the final word. A timeslot with no point must produce no packet. Every
// point must also appear once on the point stream.
module tb_listmode_builder;
  import jpet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic [3:0] in_valid, in_ready; ror_point_t in_point [4];
  logic ts_done, ror_valid, pkt_valid, pkt_last, pkt_ready;
  logic [31:0] ts_num, pkt_data, pkt_count; ror_point_t ror_point; logic [15:0] trunc_count;
  int checks = 0, failures = 0;
  listmode_builder #(.N_PKG(4), .PKT_DEPTH(64)) dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  bit [31:0] pkt [$];
  int n_pkts = 0, n_stream = 0;
  always @(posedge clk) if (rst_n) begin
    pkt_ready <= ($urandom_range(0, 3) != 0);
    if (ror_valid) n_stream++;
    if (pkt_valid && pkt_ready) begin
      pkt.push_back(pkt_data);
      if (pkt_last) n_pkts++;
    end
  end
  initial begin
    int np_tot = 0, empty = 0;
    in_valid = '0; ts_done = 0; ts_num = 0; pkt_ready = 1;
    for (int i = 0; i < 4; i++) in_point[i] = '0;
    #12 rst_n = 1;
    for (int ts = 0; ts < 20; ts++) begin
      automatic int np = (ts % 4 == 0) ? 0 : $urandom_range(1, 12);
      ror_point_t sent [$];
      sent.delete(); pkt.delete();
      for (int p = 0; p < np; p++) begin
        automatic int src = $urandom_range(0, 3);
        automatic ror_point_t pt = '{x: 16'($urandom), y: 16'($urandom), z: 16'($urandom)};
        @(negedge clk); in_valid[src] = 1; in_point[src] = pt;
        do @(posedge clk); while (!in_ready[src]);
        #0.1; in_valid[src] = 0;
        sent.push_back(pt);
      end
      np_tot += np;
      @(negedge clk); ts_done = 1; ts_num = 32'(700 + ts); @(negedge clk); ts_done = 0;
      repeat (2 * np + 40) @(negedge clk);
      if (np == 0) begin
        empty++;
        check(pkt.size() == 0, "no packet without points");
      end else begin
        check(pkt.size() == 2 + 2 * np, $sformatf("packet length %0d", pkt.size()));
        check(pkt.size() > 1 && pkt[0] == {8'hA5, 8'h00, 16'(np)} && pkt[1] == 32'(700 + ts), "header");
        for (int p = 0; p < np && 2 * p + 3 < pkt.size(); p++)
          check(pkt[2 + 2 * p] == {sent[p].x, sent[p].y} && pkt[3 + 2 * p] == {sent[p].z, 16'h0}, "point words");
      end
    end
    check(n_pkts == 20 - empty, "packet count");
    check(pkt_count == 32'(20 - empty), "packet counter");
    check(n_stream == np_tot, "point stream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
