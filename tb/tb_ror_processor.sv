`timescale 1ns/1ps
// tb_ror_processor: random sets of 2-3 strips hit on both sides, plus single-side
// noise, are loaded and flushed. Expected points come from a real-valued model of
// the ROR formula (strip time = mean of both sides, z from the side difference, point
// = LOR middle moved by c*TOF/2 towards the earlier strip, clamped to the strips),
// within 3 mm; pairs 10 ns or more apart must give no point. Hits beyond the RAM depth
// must be counted as dropped.
module tb_ror_processor;
  import jpet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic in_valid, in_ready, flush, idle, out_pop, out_empty;
  hit_t in_hit; ror_point_t out_point; logic [15:0] drop_count, point_count;
  int checks = 0, failures = 0;
  ror_processor dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  function automatic real rabs(input real v); return v < 0.0 ? -v : v; endfunction
  initial begin #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic send(input int layer, input int side, input int strip, input int t, input int x, input int y);
    @(negedge clk);
    in_valid = 1; in_hit = '0;
    in_hit.layer = 2'(layer); in_hit.side = 1'(side); in_hit.strip = 7'(strip);
    in_hit.t = time_t'(t); in_hit.x = 16'(x); in_hit.y = 16'(y);
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    int clamps = 0, skips = 0;
    in_valid = 0; flush = 0; out_pop = 0; in_hit = '0;
    #12 rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      automatic int ns = $urandom_range(2, 3);
      int lay [3], str [3], ta [3], tb [3], sx [3], sy [3];
      real ex [$], ey [$], ez [$];
      ex.delete(); ey.delete(); ez.delete();
      for (int i = 0; i < ns; i++) begin
        automatic int base = 5000000 + ((r % 4 == 0 && i == 1) ? 12000 : $urandom_range(0, 3000));
        automatic int d = $urandom_range(0, 3000) - 1500;
        automatic real a = $urandom_range(0, 359) * 3.14159265358979 / 180.0;
        lay[i] = i + 1; str[i] = $urandom_range(1, 48);
        ta[i] = base - d; tb[i] = base + d;
        sx[i] = int'($floor((400 + 80 * i) * $cos(a))); sy[i] = int'($floor((400 + 80 * i) * $sin(a)));
      end
      for (int i = 0; i < ns; i++) send(lay[i], 0, str[i], ta[i], sx[i], sy[i]);
      send(2, 0, 60, 5001000, 100, 100);           // noise: side A only
      for (int i = ns - 1; i >= 0; i--) send(lay[i], 1, str[i], tb[i], sx[i], sy[i]);
      for (int i = 0; i < ns; i++) for (int j = i + 1; j < ns; j++) begin
        automatic real ti = (ta[i] + tb[i]) / 2.0, tj = (ta[j] + tb[j]) / 2.0;
        automatic real zi = (tb[i] - ta[i]) * 0.063, zj = (tb[j] - ta[j]) * 0.063;
        automatic real dx = sx[i] - sx[j], dy = sy[i] - sy[j], dz = zi - zj;
        automatic real l = $sqrt(dx * dx + dy * dy + dz * dz);
        automatic real f = 0.1499 * (tj - ti) / l;
        if (rabs(tj - ti) >= 10000.0) begin skips++; continue; end
        if (f > 0.5) begin f = 0.5; clamps++; end
        if (f < -0.5) begin f = -0.5; clamps++; end
        ex.push_back((sx[i] + sx[j]) / 2.0 + dx * f);
        ey.push_back((sy[i] + sy[j]) / 2.0 + dy * f);
        ez.push_back((zi + zj) / 2.0 + dz * f);
      end
      @(negedge clk); flush = 1; @(negedge clk); flush = 0;
      check(!idle, "busy after flush");
      wait (idle); @(negedge clk);
      foreach (ex[k]) begin
        check(!out_empty, "point present");
        check(rabs(real'(out_point.x) - ex[k]) <= 3.0 && rabs(real'(out_point.y) - ey[k]) <= 3.0 &&
              rabs(real'(out_point.z) - ez[k]) <= 3.0,
              $sformatf("round %0d point %0d (%0d,%0d,%0d) exp (%.1f,%.1f,%.1f)", r, k,
                        out_point.x, out_point.y, out_point.z, ex[k], ey[k], ez[k]));
        out_pop = 1; @(negedge clk); out_pop = 0;
      end
      check(out_empty, "no extra point");
    end
    check(skips > 0, "pairs outside 10 ns seen");
    // RAM overflow: 20 hits into 16 entries
    for (int i = 0; i < 20; i++) send(1, 0, i + 1, 1000, 0, 0);
    check(drop_count == 16'd4, $sformatf("drops %0d", drop_count));
    @(negedge clk); flush = 1; @(negedge clk); flush = 0; wait (idle);
    $display("clamped=%0d skipped=%0d", clamps, skips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
