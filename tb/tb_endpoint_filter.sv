`timescale 1ns/1ps
// tb_endpoint_filter: words from random device IDs; only IDs BASE_DEV..BASE_DEV+3
// must pass, one cycle later, with the endpoint index; the rest must be counted.
module tb_endpoint_filter;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic in_valid, in_end, out_valid, out_end;
  logic [31:0] in_word, out_word; logic [15:0] in_dev, reject_count; logic [1:0] out_ep;
  int checks = 0, failures = 0, rej = 0;
  endpoint_filter #(.BASE_DEV(16'h0230), .N_EP(4)) dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    in_valid = 0; in_end = 0; in_word = 0; in_dev = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      automatic bit [15:0] dev = ($urandom_range(0, 1)) ? 16'h0230 + 16'($urandom_range(0, 3))
                                                          : 16'h022C + 16'($urandom_range(0, 12));
      automatic bit [31:0] w = $urandom;
      automatic bit v = $urandom_range(0, 4) != 0;
      automatic bit pass = v && dev >= 16'h0230 && dev <= 16'h0233;
      automatic bit e = (i % 50 == 49);
      @(negedge clk); in_valid = v; in_dev = dev; in_word = w; in_end = e;
      if (v && !pass) rej++;
      @(negedge clk); in_valid = 0; in_end = 0;
      check(out_valid == pass, $sformatf("pass dev %h", dev));
      check(out_end == e, "end marker");
      if (pass) check(out_word == w && out_ep == 2'(dev - 16'h0230), "word and endpoint");
    end
    check(reject_count == 16'(rej), "reject count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
