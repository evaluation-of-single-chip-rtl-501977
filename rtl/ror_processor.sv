// ror_processor: reconstructs ROR points from the hits of one timebin.
//
// There is one processor per timebin. During a timeslot it stores the qualified hits
// it receives (up to HIT_DEPTH, further ones are dropped and counted). On `flush` it
// works through them iteratively:
//   1 side pairing  each side-A hit against each side-B hit; the first B hit on the
//                   same layer and strip makes a strip hit with
//                     t = (tA + tB) / 2,  z = (tB - tA) * v_eff / 2
//                   (v_eff = 126 mm/ns, side A at +z), x and y of the strip.
//   2 strip pairing each strip hit against each later one on a different strip; a pair
//                   whose times differ by less than 10 ns gives one point:
//                     d = P_i - P_j,  L = |d|,  s = c (t_j - t_i) / 2
//                     point = (P_i + P_j)/2 + d * s / L
//                   i.e. the TOF moves the point from the middle of the LOR towards
//                   the strip hit first. |s| >= L/2 puts it on the nearer strip.
//                   L comes from a bit-serial square root (12 cycles) and s/L from a
//                   bit-serial division (11 cycles, Q12 result).
//   3 each point (x, y, z in signed mm) is written to the output FIFO; the processor
//     waits while it is full, so no point is lost.
// Interface: in_valid/in_ready hit input, flush, idle (collecting with nothing held),
// out_pop/out_point/out_empty FIFO read side for the packager.
// The per-timebin processors, their RAM, the each-vs-each pairing, the 10 ns filter
// and the output FIFO follow the paper; the formulas, constants, fixed-point formats
// and bit-serial arithmetic are this design's own.
module ror_processor
  import jpet_pkg::*;
#(
  parameter int unsigned HIT_DEPTH   = 16,
  parameter int unsigned STRIP_DEPTH = 8,
  parameter int unsigned OUT_DEPTH   = 16,
  parameter int unsigned K_Z   = 129,   // v_eff/2 in mm/ps, Q11 (0.063)
  parameter int unsigned K_TOF = 307    // c/2 in mm/ps, Q11 (0.1499)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  hit_t       in_hit,
  output logic       in_ready,
  input  logic       flush,
  output logic       idle,
  input  logic       out_pop,
  output ror_point_t out_point,
  output logic       out_empty,
  output logic [15:0] drop_count,
  output logic [15:0] point_count
);
  localparam int unsigned HW = $clog2(HIT_DEPTH);
  localparam int unsigned SW = $clog2(STRIP_DEPTH);

  typedef struct packed {
    logic [1:0] layer;
    logic       side;
    logic [6:0] strip;
    time_t      t;
    coord_t     x;
    coord_t     y;
  } slot_t;

  typedef struct packed {
    logic [1:0] layer;
    logic [6:0] strip;
    time_t      t;
    coord_t     x;
    coord_t     y;
    coord_t     z;
  } strip_hit_t;

  typedef enum logic [3:0] {COLLECT, SIDE, STRIP, SQRT, DIV, POINT, PUSH} state_e;

  state_e     st_q;
  slot_t      hits_q [HIT_DEPTH];
  strip_hit_t sh_q [STRIP_DEPTH];
  logic [HW:0] n_q, i_q, j_q;
  logic [SW:0] ns_q, a_q, b_q;

  // pair arithmetic registers
  logic signed [16:0] dx_q, dy_q, dz_q;
  logic [23:0]        l2_q;
  logic [11:0]        len_q;
  logic [3:0]         bit_q;
  logic signed [15:0] s_q;
  logic [10:0]        q_q;
  logic [22:0]        num_q;
  logic               clamp_q;
  ror_point_t         pt_q;

  // output FIFO
  logic out_full, out_drop, push_pt;
  logic [$clog2(OUT_DEPTH):0] out_count;
  sync_fifo #(.W($bits(ror_point_t)), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .push(push_pt), .in_data(pt_q), .pop(out_pop), .out_data(out_point),
    .empty(out_empty), .full(out_full), .drop(out_drop), .count(out_count));
  assign push_pt = (st_q == PUSH) && !out_full;

  assign in_ready = (st_q == COLLECT);
  assign idle     = (st_q == COLLECT) && (n_q == '0);

  // side pairing candidates
  slot_t hi, hj;
  assign hi = hits_q[i_q[HW-1:0]];
  assign hj = hits_q[j_q[HW-1:0]];
  logic side_match;
  assign side_match = (hi.side == 1'b0) && (hj.side == 1'b1) &&
                      (hi.layer == hj.layer) && (hi.strip == hj.strip);
  logic signed [26:0] tab;      // tB - tA
  assign tab = $signed({2'b0, hj.t}) - $signed({2'b0, hi.t});

  // strip pairing candidates
  strip_hit_t sa, sb;
  assign sa = sh_q[a_q[SW-1:0]];
  assign sb = sh_q[b_q[SW-1:0]];
  logic signed [26:0] tba;      // t_b - t_a
  assign tba = $signed({2'b0, sb.t}) - $signed({2'b0, sa.t});
  logic pair_ok;
  assign pair_ok = (tba > -27'sd10000) && (tba < 27'sd10000) &&
                   !((sa.layer == sb.layer) && (sa.strip == sb.strip));

  // arithmetic helpers
  logic [11:0] sq_try;
  logic [23:0] sq_sq;
  assign sq_try = len_q | (12'd1 << bit_q);
  assign sq_sq  = sq_try * sq_try;
  logic [10:0] dv_try;
  logic [22:0] dv_prod;
  assign dv_try  = q_q | (11'd1 << bit_q);
  assign dv_prod = 23'(dv_try) * 23'(len_q);
  logic signed [12:0] qs;       // signed fraction s/L, Q12
  assign qs = clamp_q ? (s_q < 0 ? -13'sd2048 : 13'sd2048)
                      : (s_q < 0 ? -$signed({2'b0, q_q}) : $signed({2'b0, q_q}));
  function automatic coord_t place(input coord_t pa, input coord_t pb,
                                   input logic signed [16:0] d, input logic signed [12:0] f);
    logic signed [30:0] prod;
    logic signed [17:0] mid;
    mid  = (18'(pa) + 18'(pb)) >>> 1;
    prod = 31'(d) * 31'(f);
    return coord_t'(mid + 18'(prod >>> 12));
  endfunction
  logic [15:0] abs_s;
  assign abs_s = s_q < 0 ? 16'(-s_q) : 16'(s_q);

  logic signed [43:0] z_prod, s_prod;
  localparam logic signed [15:0] KZ_S   = 16'(K_Z);
  localparam logic signed [15:0] KTOF_S = 16'(K_TOF);
  assign z_prod = 44'(tab) * 44'(KZ_S);
  assign s_prod = 44'(tba) * 44'(KTOF_S);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= COLLECT;
      n_q <= '0; i_q <= '0; j_q <= '0; ns_q <= '0; a_q <= '0; b_q <= '0;
      dx_q <= '0; dy_q <= '0; dz_q <= '0; l2_q <= '0; len_q <= '0; bit_q <= '0;
      s_q <= '0; q_q <= '0; num_q <= '0; clamp_q <= 1'b0; pt_q <= '0;
      drop_count <= '0; point_count <= '0;
      for (int k = 0; k < HIT_DEPTH; k++) hits_q[k] <= '0;
      for (int k = 0; k < STRIP_DEPTH; k++) sh_q[k] <= '0;
    end else begin
      case (st_q)
        COLLECT: begin
          if (in_valid) begin
            if (n_q < (HW+1)'(HIT_DEPTH)) begin
              hits_q[n_q[HW-1:0]] <= '{layer: in_hit.layer, side: in_hit.side, strip: in_hit.strip,
                                      t: in_hit.t, x: in_hit.x, y: in_hit.y};
              n_q <= n_q + 1'b1;
            end else if (drop_count != 16'hFFFF) begin
              drop_count <= drop_count + 16'd1;
            end
          end
          if (flush) begin
            st_q <= SIDE; i_q <= '0; j_q <= '0; ns_q <= '0;
          end
        end
        // ---- each side-A hit against each side-B hit
        SIDE: begin
          if (i_q >= n_q) begin
            st_q <= STRIP; a_q <= '0; b_q <= (SW+1)'(1);
          end else if (j_q >= n_q || hi.side) begin
            i_q <= i_q + 1'b1; j_q <= '0;
          end else if (side_match) begin
            if (ns_q < (SW+1)'(STRIP_DEPTH)) begin
              sh_q[ns_q[SW-1:0]] <= '{layer: hi.layer, strip: hi.strip,
                                     t: time_t'((27'(hi.t) + 27'(hj.t)) >> 1),
                                     x: hi.x, y: hi.y, z: coord_t'(z_prod >>> 11)};
              ns_q <= ns_q + 1'b1;
            end
            i_q <= i_q + 1'b1; j_q <= '0;
          end else begin
            j_q <= j_q + 1'b1;
          end
        end
        // ---- each strip hit against each later one
        STRIP: begin
          if (a_q + 1'b1 >= ns_q) begin
            st_q <= COLLECT; n_q <= '0;
          end else if (b_q >= ns_q) begin
            a_q <= a_q + 1'b1; b_q <= a_q + (SW+1)'(2);
          end else if (pair_ok) begin
            dx_q  <= 17'(sa.x) - 17'(sb.x);
            dy_q  <= 17'(sa.y) - 17'(sb.y);
            dz_q  <= 17'(sa.z) - 17'(sb.z);
            l2_q  <= 24'((34'(17'(sa.x) - 17'(sb.x)) * 34'(17'(sa.x) - 17'(sb.x))) +
                         (34'(17'(sa.y) - 17'(sb.y)) * 34'(17'(sa.y) - 17'(sb.y))) +
                         (34'(17'(sa.z) - 17'(sb.z)) * 34'(17'(sa.z) - 17'(sb.z))));
            s_q   <= 16'(s_prod >>> 11);
            len_q <= '0;
            bit_q <= 4'd11;
            st_q  <= SQRT;
          end else begin
            b_q <= b_q + 1'b1;
          end
        end
        SQRT: begin
          if (sq_sq <= l2_q) len_q <= sq_try;
          if (bit_q == 4'd0) begin
            st_q <= DIV;
          end
          bit_q <= bit_q - 4'd1;
        end
        DIV: begin
          if (bit_q == 4'hF) begin          // set up
            clamp_q <= (17'(abs_s) << 1) >= 17'(len_q);
            num_q   <= 23'(abs_s) << 12;
            q_q     <= '0;
            bit_q   <= 4'd10;
          end else begin
            if (dv_prod <= num_q) q_q <= dv_try;
            if (bit_q == 4'd0) st_q <= POINT;
            bit_q <= bit_q - 4'd1;
          end
        end
        POINT: begin
          pt_q.x <= place(sa.x, sb.x, dx_q, qs);
          pt_q.y <= place(sa.y, sb.y, dy_q, qs);
          pt_q.z <= place(sa.z, sb.z, dz_q, qs);
          st_q   <= PUSH;
        end
        PUSH: if (!out_full) begin
          point_count <= point_count + 16'd1;
          b_q  <= b_q + 1'b1;
          st_q <= STRIP;
        end
        default: st_q <= COLLECT;
      endcase
    end
  end
endmodule
