// data_combiner: joins the eight decomposition channels into one timeslot-aligned bus.
//
// A timeslot is complete only when the packets of all eight TRB boards carrying the
// same timeslot number have been processed. The combiner waits until every channel's
// derandomizing buffer holds data (and the pipelines downstream can take a new
// timeslot), then pulses `go` to all channels at once, so their parsers run in
// parallel on the same timeslot. The channels' hit outputs are registered onto one
// combined bus (eight lanes, one per segment, so no hit is ever delayed by another
// channel). When every channel has signalled the end of its packet, ts_end pulses
// with the timeslot number; ts_mismatch is set with it if the channels reported
// different timeslot numbers, and mismatch_count counts such timeslots.
// Timing: go one cycle after the start condition; bus and ts_end one cycle after the
// channel outputs, so ts_end always follows the last hit of the timeslot.
// The start condition and the end-of-timeslot rule follow the paper ("when data is
// available in all decomposition channels", "when there is no more data in the
// derandomizing buffers"); the lane-parallel bus is this design's choice.
module data_combiner
  import jpet_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [N_CH-1:0] data_avail,
  input  logic        downstream_ready,
  output logic        go,
  input  logic [N_CH-1:0] ts_valid,
  input  logic [31:0] ts_num [N_CH],
  input  logic [N_CH-1:0] in_valid,
  input  hit_t        in_hit [N_CH],
  input  logic [N_CH-1:0] in_end,
  output logic [N_CH-1:0] bus_valid,
  output hit_t        bus_hit [N_CH],
  output logic        ts_end,
  output logic [31:0] ts_end_num,
  output logic        ts_mismatch,
  output logic [15:0] mismatch_count,
  output logic [31:0] ts_count
);
  logic            active_q;
  logic [N_CH-1:0] ended_q, ended_n;
  logic [N_CH-1:0] seen_q;
  logic [31:0]     num_q [N_CH];

  assign ended_n = ended_q | in_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q       <= 1'b0;
      ended_q        <= '0;
      seen_q         <= '0;
      go             <= 1'b0;
      bus_valid      <= '0;
      ts_end         <= 1'b0;
      ts_end_num     <= '0;
      ts_mismatch    <= 1'b0;
      mismatch_count <= '0;
      ts_count       <= '0;
      for (int c = 0; c < N_CH; c++) begin
        bus_hit[c] <= '0;
        num_q[c]   <= '0;
      end
    end else begin
      go          <= 1'b0;
      ts_end      <= 1'b0;
      ts_mismatch <= 1'b0;
      bus_valid   <= in_valid;
      for (int c = 0; c < N_CH; c++) begin
        bus_hit[c] <= in_hit[c];
        if (ts_valid[c]) begin
          num_q[c]  <= ts_num[c];
          seen_q[c] <= 1'b1;
        end
      end
      if (!active_q) begin
        if (&data_avail && downstream_ready && !go) begin
          go       <= 1'b1;
          active_q <= 1'b1;
          ended_q  <= '0;
          seen_q   <= '0;
        end
      end else begin
        ended_q <= ended_n;
        if (&ended_n) begin
          active_q   <= 1'b0;
          ts_end     <= 1'b1;
          ts_end_num <= num_q[0];
          ts_count   <= ts_count + 32'd1;
          for (int c = 1; c < N_CH; c++) begin
            if (num_q[c] != num_q[0] || !seen_q[c]) begin
              ts_mismatch <= 1'b1;
            end
          end
        end
      end
      if (ts_mismatch && mismatch_count != 16'hFFFF) mismatch_count <= mismatch_count + 16'd1;
    end
  end
endmodule
