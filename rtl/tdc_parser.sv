// tdc_parser: turns TRB3 TDC words into calibrated hits with arrival time and width.
//
// A TDC time has three parts: a fine time (0..5 ns, about 12 ps bins), an 11-bit
// coarse counter of 5 ns and a 28-bit epoch counter of 10.24 us that the TDC writes
// as a separate word only when the coarse counter has wrapped. The parser keeps the
// last epoch of each endpoint, forms coarse_total = {epoch, coarse}, and measures
// every hit against the reference channel (channel 0) of the same endpoint, on which
// the TDC registers the timeslot start marker:
//   t = (coarse_total - ref_coarse_total) * 5000 - fine_ps + ref_fine_ps + offset[ch]
// in picoseconds. fine_ps = (fine - fine_min) * fine_scale / 4096 is a linear fine
// time calibration and offset[ch] a per-channel time offset, both written through the
// control port. Hits whose leading edge falls outside 0..20 us are dropped and
// counted. The leading edge of a channel is held until its trailing edge arrives;
// then one hit leaves with time = leading time and width = trailing - leading.
//
// Word formats (TRB3): hit [31]=1, [28:22] channel, [21:12] fine, [11] edge
// (1 = leading), [10:0] coarse; epoch [31:29]=011, [27:0] epoch. Other words are
// ignored. TDC channel number n = ep*48 + channel-1 (0..191).
// Timing: streaming, one word per cycle, no back-pressure; a hit leaves 3 cycles
// after its trailing-edge word. in_end (end of timeslot) leaves 3 cycles later as
// out_end, after the timeslot's last hit, and clears reference and pending edges.
// From the paper: the three time components, reference-channel synchronisation,
// calibration of fine time and channel offsets, 0..20 us range, leading/trailing
// pairing. This design's choices: word layout (TRB3), linear instead of per-bin (DNL)
// fine calibration, dropping out-of-range hits and unpaired edges.
module tdc_parser
  import jpet_pkg::*;
#(
  parameter logic [2:0] CH_IDX = 3'd0,          // which stream, for register decode
  parameter logic [9:0]  FINE_MIN_RST   = 10'd0,
  parameter logic [19:0] FINE_SCALE_RST = 20'd49113  // 5000 ps / 417 bins, Q12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_wr_t     cfg,
  input  logic        in_valid,
  input  logic [31:0] in_word,
  input  logic [1:0]  in_ep,
  input  logic        in_end,
  output logic        out_valid,
  output logic [7:0]  out_tdc_ch,
  output time_t       out_t,
  output logic [WIDTH_W-1:0] out_width,
  output logic        out_end,
  output logic [15:0] drop_count
);
  // ---------------------------------------------------------- calibration registers
  logic signed [15:0] offset_q [N_CHAN];
  logic [9:0]         fine_min_q;
  logic [19:0]        fine_scale_q;
  logic               cfg_hit;
  assign cfg_hit = cfg.we && (cfg.addr[15:12] == REG_CH_BASE[15:12]) && (cfg.addr[11:9] == CH_IDX);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CHAN; i++) offset_q[i] <= '0;
      fine_min_q   <= FINE_MIN_RST;
      fine_scale_q <= FINE_SCALE_RST;
    end else if (cfg_hit) begin
      if (cfg.addr[8:0] < 9'(N_CHAN)) offset_q[cfg.addr[7:0]] <= cfg.data[15:0];
      else if (cfg.addr[8:0] == 9'h100) fine_min_q   <= cfg.data[9:0];
      else if (cfg.addr[8:0] == 9'h101) fine_scale_q <= cfg.data[19:0];
    end
  end

  // ---------------------------------------------------------- stage 0: decode
  logic        is_hit, is_epoch, lead;
  logic [6:0]  chan;
  logic [9:0]  fine;
  logic [10:0] coarse;
  logic [29:0] fine_prod;
  logic [12:0] fine_ps;
  logic [27:0] epoch_q [N_EP];
  logic [38:0] ref_ct_q [N_EP];
  logic [12:0] ref_fine_q [N_EP];
  logic [N_EP-1:0] ref_seen_q;

  assign is_hit    = in_valid && in_word[31];
  assign is_epoch  = in_valid && (in_word[31:29] == EPOCH_MARK);
  assign chan      = in_word[28:22];
  assign fine      = in_word[21:12];
  assign lead      = in_word[11];
  assign coarse    = in_word[10:0];
  assign fine_prod = (fine > fine_min_q) ? 30'(fine - fine_min_q) * 30'(fine_scale_q) : '0;
  assign fine_ps   = (fine_prod[29:12] > 18'd8191) ? 13'd8191 : fine_prod[24:12];

  // ---------------------------------------------------------- stage 1 registers
  logic        s1_valid, s1_lead, s1_end;
  logic [7:0]  s1_ch;
  logic signed [24:0] s1_dct;        // coarse ticks since reference
  logic signed [14:0] s1_dfine;      // ref_fine - fine, ps
  logic signed [15:0] s1_off;
  logic [38:0] ct_now;
  assign ct_now = {epoch_q[in_ep], coarse};

  // ---------------------------------------------------------- stage 2 registers
  logic        s2_valid, s2_lead, s2_end;
  logic [7:0]  s2_ch;
  logic signed [31:0] s2_t;
  logic signed [31:0] t_calc;
  assign t_calc = 32'(s1_dct) * 32'sd5000 + 32'(s1_dfine) + 32'(s1_off);

  // ---------------------------------------------------------- pending leading edges
  time_t           lead_t_q [N_CHAN];
  logic [N_CHAN-1:0] lead_v_q;
  logic            in_range;
  logic signed [31:0] width_s;
  assign in_range = (s2_t >= 0) && (s2_t < 32'sd20_000_000);
  assign width_s  = s2_t - 32'(lead_t_q[s2_ch]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < N_EP; e++) begin
        epoch_q[e]    <= '0;
        ref_ct_q[e]   <= '0;
        ref_fine_q[e] <= '0;
      end
      for (int i = 0; i < N_CHAN; i++) lead_t_q[i] <= '0;
      ref_seen_q <= '0;
      lead_v_q   <= '0;
      s1_valid <= 1'b0; s1_lead <= 1'b0; s1_end <= 1'b0; s1_ch <= '0;
      s1_dct   <= '0;   s1_dfine <= '0;  s1_off <= '0;
      s2_valid <= 1'b0; s2_lead <= 1'b0; s2_end <= 1'b0; s2_ch <= '0; s2_t <= '0;
      out_valid <= 1'b0; out_tdc_ch <= '0; out_t <= '0; out_width <= '0; out_end <= 1'b0;
      drop_count <= '0;
    end else begin
      // stage 0 -> 1
      s1_valid <= 1'b0;
      s1_end   <= in_end;
      if (is_epoch) epoch_q[in_ep] <= in_word[27:0];
      if (is_hit && chan == 7'd0 && lead) begin
        ref_ct_q[in_ep]   <= ct_now;
        ref_fine_q[in_ep] <= fine_ps;
        ref_seen_q[in_ep] <= 1'b1;
      end else if (is_hit && chan >= 7'd1 && chan <= 7'(N_TDC_CH)) begin
        if (ref_seen_q[in_ep]) begin
          s1_valid <= 1'b1;
          s1_lead  <= lead;
          s1_ch    <= 8'(in_ep) * 8'(N_TDC_CH) + 8'(chan) - 8'd1;
          s1_dct   <= 25'(ct_now - ref_ct_q[in_ep]);
          s1_dfine <= 15'(ref_fine_q[in_ep]) - 15'(fine_ps);
          s1_off   <= offset_q[8'(in_ep) * 8'(N_TDC_CH) + 8'(chan) - 8'd1];
        end else if (drop_count != 16'hFFFF) begin
          drop_count <= drop_count + 16'd1;
        end
      end
      // stage 1 -> 2
      s2_valid <= s1_valid;
      s2_lead  <= s1_lead;
      s2_ch    <= s1_ch;
      s2_t     <= t_calc;
      s2_end   <= s1_end;
      // stage 2 -> out
      out_valid <= 1'b0;
      out_end   <= s2_end;
      if (s2_valid) begin
        if (s2_lead) begin
          if (in_range) begin
            lead_t_q[s2_ch] <= time_t'(s2_t);
            lead_v_q[s2_ch] <= 1'b1;
          end else if (drop_count != 16'hFFFF) begin
            drop_count <= drop_count + 16'd1;
          end
        end else if (lead_v_q[s2_ch]) begin
          lead_v_q[s2_ch] <= 1'b0;
          out_valid  <= 1'b1;
          out_tdc_ch <= s2_ch;
          out_t      <= lead_t_q[s2_ch];
          out_width  <= (width_s < 0) ? '0 :
                        (width_s >= 32'sd1 <<< WIDTH_W) ? '1 : WIDTH_W'(width_s);
        end
      end
      if (s2_end) begin
        lead_v_q   <= '0;
        ref_seen_q <= '0;
      end
    end
  end
endmodule
