`timescale 1ns/1ps
// tb_geo_mapper: three instances (streams 0, 3 and 7) map every TDC channel; layer,
// side, strip, threshold and X/Y (computed here from the barrel radii and angles with
// $cos/$sin, within 1 mm for values that sit on a rounding edge) must match, one
// cycle after the input.
module tb_geo_mapper;
  import jpet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic in_valid, in_end;
  logic [7:0] in_tdc_ch; time_t in_t; logic [WIDTH_W-1:0] in_width;
  logic [2:0] ov, oe; hit_t oh [3];
  int checks = 0, failures = 0;
  geo_mapper #(.CH_IDX(3'd0)) d0 (.clk, .rst_n, .in_valid, .in_tdc_ch, .in_t, .in_width, .in_end,
                                  .out_valid(ov[0]), .out_hit(oh[0]), .out_end(oe[0]));
  geo_mapper #(.CH_IDX(3'd3)) d1 (.clk, .rst_n, .in_valid, .in_tdc_ch, .in_t, .in_width, .in_end,
                                  .out_valid(ov[1]), .out_hit(oh[1]), .out_end(oe[1]));
  geo_mapper #(.CH_IDX(3'd7)) d2 (.clk, .rst_n, .in_valid, .in_tdc_ch, .in_t, .in_width, .in_end,
                                  .out_valid(ov[2]), .out_hit(oh[2]), .out_end(oe[2]));
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic void xy(input int layer, input int strip, output int x, output int y);
    real r, a;
    if (layer == 1) begin r = 425.0; a = 7.5 * (strip - 1); end
    else if (layer == 2) begin r = 467.5; a = 3.75 + 7.5 * (strip - 1); end
    else begin r = 575.0; a = 1.875 + 3.75 * (strip - 1); end
    x = int'($floor(r * $cos(a * 3.14159265358979 / 180.0) + 0.5));
    y = int'($floor(r * $sin(a * 3.14159265358979 / 180.0) + 0.5));
  endfunction
  initial begin
    int lay [3] = '{1, 2, 3};
    int sid [3] = '{0, 1, 1};
    int sbase [3] = '{0, 0, 48};
    int chn [3] = '{0, 3, 7};
    in_valid = 0; in_end = 0; in_tdc_ch = 0; in_t = 0; in_width = 0;
    #12 rst_n = 1;
    for (int n = 0; n < 192; n++) begin
      @(negedge clk); in_valid = 1; in_tdc_ch = 8'(n); in_t = time_t'($urandom); in_width = $urandom;
      in_end = (n == 191);
      @(negedge clk); in_valid = 0; in_end = 0;
      for (int k = 0; k < 3; k++) begin
        automatic int strip = sbase[k] + n / 4 + 1;
        automatic int x, y;
        xy(lay[k], strip, x, y);
        check(ov[k] && oh[k].layer == 2'(lay[k]) && oh[k].side == 1'(sid[k]) && oh[k].strip == 7'(strip) &&
              oh[k].thr == 2'(n % 4) && oh[k].ch == 3'(chn[k]) && oh[k].tdc_ch == 8'(n) &&
              oh[k].t == in_t && oh[k].width == in_width,
              $sformatf("fields stream %0d ch %0d", chn[k], n));
        check((int'(oh[k].x) - x) inside {[-1:1]} && (int'(oh[k].y) - y) inside {[-1:1]},
              $sformatf("xy stream %0d strip %0d got %0d,%0d exp %0d,%0d", chn[k], strip, oh[k].x, oh[k].y, x, y));
        check(oe[k] == (n == 191), "end marker");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
