// listmode_builder: collects the ROR points of a timeslot and emits one list-mode packet.
//
// The four packagers feed this block; it takes one point per cycle from them in
// round-robin order, forwards each point at once on the point stream (ror_valid /
// ror_point, the path to the processor's shared memory for the point cloud) and
// stores it for the list-mode packet. When ts_done arrives (all ROR work of that
// timeslot finished) and at least one point was stored, the packet is sent:
//   word 0   {8'hA5, 8'h00, n_points[15:0]}
//   word 1   timeslot number
//   then per point {x[15:0], y[15:0]}, {z[15:0], 16'h0000}; pkt_last on the final word.
// A timeslot without points produces no packet, as in the paper ("an output packet is
// constructed only in case a ROR is reconstructed"). Points beyond PKT_DEPTH are
// still forwarded on the point stream but left out of the packet and counted.
// Packet output is valid/ready; points are not accepted while a packet is sent.
// The packet layout is this design's choice.
module listmode_builder
  import jpet_pkg::*;
#(
  parameter int unsigned N_PKG     = 4,
  parameter int unsigned PKT_DEPTH = 512   // points per packet; power of two
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [N_PKG-1:0] in_valid,
  input  ror_point_t in_point [N_PKG],
  output logic [N_PKG-1:0] in_ready,
  input  logic       ts_done,
  input  logic [31:0] ts_num,
  output logic       ror_valid,
  output ror_point_t ror_point,
  output logic [31:0] pkt_data,
  output logic       pkt_valid,
  output logic       pkt_last,
  input  logic       pkt_ready,
  output logic [31:0] pkt_count,
  output logic [15:0] trunc_count
);
  localparam int unsigned AW = $clog2(PKT_DEPTH);
  typedef enum logic [1:0] {GATHER, HDR, TS, BODY} state_e;

  state_e     st_q;
  ror_point_t buf_q [PKT_DEPTH];
  logic [AW:0] n_q, rd_q;
  logic        half_q;
  logic [31:0] ts_q;
  logic [$clog2(N_PKG)-1:0] rr_q;
  logic        take;

  assign take = (st_q == GATHER) && in_valid[rr_q];
  always_comb begin
    in_ready = '0;
    in_ready[rr_q] = (st_q == GATHER);
  end

  ror_point_t cur;
  assign cur = buf_q[rd_q[AW-1:0]];
  always_comb begin
    pkt_valid = (st_q != GATHER);
    pkt_last  = 1'b0;
    unique case (st_q)
      HDR:     pkt_data = {8'hA5, 8'h00, 16'(n_q)};
      TS:      pkt_data = ts_q;
      BODY: begin
        pkt_data = half_q ? {cur.z, 16'h0000} : {cur.x, cur.y};
        pkt_last = half_q && (rd_q + 1'b1 == n_q);
      end
      default: pkt_data = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= GATHER; n_q <= '0; rd_q <= '0; half_q <= 1'b0; ts_q <= '0; rr_q <= '0;
      ror_valid <= 1'b0; ror_point <= '0; pkt_count <= '0; trunc_count <= '0;
    end else begin
      ror_valid <= take;
      if (take) ror_point <= in_point[rr_q];
      case (st_q)
        GATHER: begin
          rr_q <= (rr_q == ($clog2(N_PKG))'(N_PKG - 1)) ? '0 : rr_q + 1'b1;
          if (take) begin
            if (n_q < (AW+1)'(PKT_DEPTH)) n_q <= n_q + 1'b1;
            else if (trunc_count != 16'hFFFF) trunc_count <= trunc_count + 16'd1;
          end
          if (ts_done) begin
            ts_q <= ts_num;
            if (n_q != '0 || take) st_q <= HDR;
          end
        end
        HDR: if (pkt_ready) st_q <= TS;
        TS:  if (pkt_ready) begin st_q <= BODY; rd_q <= '0; half_q <= 1'b0; end
        BODY: if (pkt_ready) begin
          half_q <= !half_q;
          if (half_q) begin
            rd_q <= rd_q + 1'b1;
            if (pkt_last) begin
              st_q <= GATHER;
              n_q  <= '0;
              pkt_count <= pkt_count + 32'd1;
            end
          end
        end
        default: st_q <= GATHER;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (take && n_q < (AW+1)'(PKT_DEPTH)) buf_q[n_q[AW-1:0]] <= in_point[rr_q];
  end
endmodule
