`timescale 1ns/1ps
// tb_derand_fifo: packets of random length written as bytes at 125 MHz must come out
// as the same 32-bit words (first byte in bits 31:24) with `last` on the final word,
// read at 200 MHz with random read stalls. A burst larger than the FIFO must raise
// wr_overflow. Small DEPTH keeps the run short.
module tb_derand_fifo;
  logic wr_clk = 0, rd_clk = 0, wr_rst_n = 0, rd_rst_n = 0;
  always #4.0 wr_clk = ~wr_clk;
  always #2.5 rd_clk = ~rd_clk;
  logic [7:0] wr_byte; logic wr_valid, wr_last, wr_overflow;
  logic [31:0] rd_data; logic rd_last, rd_valid, rd_ready;
  int checks = 0, failures = 0, n_ovf = 0;
  derand_fifo #(.DEPTH(16)) dut (.*);
  bit [32:0] exp_q [$];
  initial begin #200us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge wr_clk) if (wr_overflow) n_ovf++;
  always @(posedge rd_clk) rd_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge rd_clk) if (rd_rst_n && rd_valid && rd_ready) begin
    checks++;
    if (exp_q.size() == 0 || exp_q[0] != {rd_last, rd_data}) begin
      failures++; $display("FAIL got %h exp %h", {rd_last, rd_data}, exp_q.size() ? exp_q[0] : 0);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
  end
  task automatic send(input int nw, input bit expect_all);
    for (int i = 0; i < nw; i++) begin
      automatic bit [31:0] w = $urandom;
      if (expect_all) exp_q.push_back({i == nw - 1, w});
      for (int b = 3; b >= 0; b--) begin
        @(negedge wr_clk); wr_valid = 1; wr_byte = w[8*b +: 8]; wr_last = (i == nw - 1) && b == 0;
      end
    end
    @(negedge wr_clk); wr_valid = 0; wr_last = 0;
  endtask
  initial begin
    wr_valid = 0; wr_last = 0; wr_byte = 0;
    #30 wr_rst_n = 1; rd_rst_n = 1;
    for (int p = 0; p < 40; p++) begin
      send($urandom_range(1, 12), 1);
      repeat ($urandom_range(0, 20)) @(negedge wr_clk);
      wait (exp_q.size() < 4);
    end
    wait (exp_q.size() == 0);
    #200;
    // overflow: hold the reader and write 24 words into 16 entries
    force rd_ready = 0;
    send(24, 0);
    #100;
    checks++; if (n_ovf != 8) begin failures++; $display("FAIL overflow %0d", n_ovf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
