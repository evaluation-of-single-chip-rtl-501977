// coinc_search: coincidence search pipeline, finds the timebins that may hold a LOR.
//
// For every stream the module keeps a 2D bit array of 32 timebins x 48 strips. Each
// lowest-threshold hit on the combined bus sets bit [timebin(t)][local strip] of its
// stream's array as it passes (timebin = t / 625 ns). When the combiner signals the
// end of the timeslot the search runs in five clock cycles:
//   1  register input : arrays (with hits of that same cycle) are copied and cleared,
//                       so the next timeslot can start filling at once
//   2  side A AND side B of each segment (streams 0&1, 2&3, 4&5, 6&7): single-strip
//                       coincidences, all 4 x 32 x 48 bits at once
//   3  per timebin: two or more strips fired over all segments (v & (v-1) != 0)
//   4  output construction: LOR flag, timebin mask, strip coincidence arrays
//   5  register output
// res_valid therefore pulses 5 clock edges after the edge that samples ts_end
// (25 ns at 200 MHz), for every timeslot, with lor_found = 0 when none qualified.
// The array sizes, the AND of the side arrays, the multi-strip test per timebin and
// the five cycles are the paper's. Using only the lowest threshold to fill the arrays
// is this design's choice.
module coinc_search
  import jpet_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [N_CH-1:0] in_valid,
  input  hit_t        in_hit [N_CH],
  input  logic        ts_end,
  input  logic [31:0] ts_num,
  output logic        res_valid,
  output logic [31:0] res_ts,
  output logic        lor_found,
  output logic [N_TB-1:0] tb_mask,
  output logic [N_STRIP-1:0] strip_coinc [N_PAIR][N_TB],
  output logic [31:0] found_count
);
  logic [N_STRIP-1:0] arr_q  [N_CH][N_TB];
  logic [N_STRIP-1:0] arr_n  [N_CH][N_TB];
  logic [N_STRIP-1:0] snap_q [N_CH][N_TB];
  logic [N_STRIP-1:0] and_q  [N_PAIR][N_TB];
  logic [N_STRIP-1:0] and2_q [N_PAIR][N_TB];
  logic [N_STRIP-1:0] and3_q [N_PAIR][N_TB];
  logic [N_TB-1:0]    multi_q, mask4_q;
  logic               s1, s2, s3, s4, found4_q;
  logic [31:0]        ts1, ts2, ts3, ts4;

  // array update with the hits of this cycle
  always_comb begin
    arr_n = arr_q;
    for (int c = 0; c < N_CH; c++) begin
      if (in_valid[c] && in_hit[c].thr == 2'd0)
        arr_n[c][timebin_of(in_hit[c].t)][in_hit[c].tdc_ch[7:2]] = 1'b1;
    end
  end

  function automatic logic two_or_more(input logic [N_PAIR*N_STRIP-1:0] v);
    return (v & (v - 1'b1)) != '0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++)
        for (int b = 0; b < N_TB; b++) begin
          arr_q[c][b]  <= '0;
          snap_q[c][b] <= '0;
        end
      for (int p = 0; p < N_PAIR; p++)
        for (int b = 0; b < N_TB; b++) begin
          and_q[p][b] <= '0; and2_q[p][b] <= '0; and3_q[p][b] <= '0; strip_coinc[p][b] <= '0;
        end
      {s1, s2, s3, s4} <= '0;
      {ts1, ts2, ts3, ts4} <= '0;
      multi_q <= '0; mask4_q <= '0; found4_q <= 1'b0;
      res_valid <= 1'b0; res_ts <= '0; lor_found <= 1'b0; tb_mask <= '0;
      found_count <= '0;
    end else begin
      // 1: register input
      s1  <= ts_end;
      ts1 <= ts_num;
      if (ts_end) begin
        snap_q <= arr_n;
        for (int c = 0; c < N_CH; c++)
          for (int b = 0; b < N_TB; b++) arr_q[c][b] <= '0;
      end else begin
        arr_q <= arr_n;
      end
      // 2: side A AND side B
      s2  <= s1;
      ts2 <= ts1;
      for (int p = 0; p < N_PAIR; p++)
        for (int b = 0; b < N_TB; b++) and_q[p][b] <= snap_q[2*p][b] & snap_q[2*p+1][b];
      // 3: two or more strips per timebin
      s3  <= s2;
      ts3 <= ts2;
      and2_q <= and_q;
      for (int b = 0; b < N_TB; b++)
        multi_q[b] <= two_or_more({and_q[3][b], and_q[2][b], and_q[1][b], and_q[0][b]});
      // 4: output construction
      s4       <= s3;
      ts4      <= ts3;
      and3_q   <= and2_q;
      mask4_q  <= multi_q;
      found4_q <= |multi_q;
      // 5: register output
      res_valid <= s4;
      if (s4) begin
        res_ts      <= ts4;
        lor_found   <= found4_q;
        tb_mask     <= mask4_q;
        strip_coinc <= and3_q;
        if (found4_q) found_count <= found_count + 32'd1;
      end
    end
  end
endmodule
