// ror_packager: drains a group of ROR processor output buffers in round-robin order.
//
// The 32 processor output FIFOs are served by four packagers, each owning N_IN of
// them (packager k serves processors k*N_IN .. k*N_IN+N_IN-1). A pointer visits the
// FIFOs in turn, one per cycle; when the visited FIFO holds a point and the output
// register is free (or being emptied) the point is popped into the output register.
// Output: out_valid/out_ready handshake carrying an X, Y, Z point; out_src is the
// processor (= timebin) inside the group. At most one point per cycle per packager.
// busy is set while a point waits in the output register.
// Four packagers and the round-robin order follow the paper; visiting one FIFO per
// cycle is this design's choice.
module ror_packager
  import jpet_pkg::*;
#(
  parameter int unsigned N_IN = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [N_IN-1:0] in_empty,
  input  ror_point_t in_point [N_IN],
  output logic [N_IN-1:0] in_pop,
  output logic       out_valid,
  output ror_point_t out_point,
  output logic [$clog2(N_IN)-1:0] out_src,
  input  logic       out_ready,
  output logic       busy
);
  logic [$clog2(N_IN)-1:0] rr_q;
  logic take;

  assign take = !in_empty[rr_q] && (!out_valid || out_ready);
  always_comb begin
    in_pop = '0;
    in_pop[rr_q] = take;
  end
  assign busy = out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q      <= '0;
      out_valid <= 1'b0;
      out_point <= '0;
      out_src   <= '0;
    end else begin
      rr_q <= (rr_q == ($clog2(N_IN))'(N_IN - 1)) ? '0 : rr_q + 1'b1;
      if (take) begin
        out_valid <= 1'b1;
        out_point <= in_point[rr_q];
        out_src   <= rr_q;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) (in_pop & in_empty) == '0);
endmodule
