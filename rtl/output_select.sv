// output_select: chooses what leaves the chip on the output stream, raw or list-mode.
//
// In raw mode (mode = 0) the original TRB packets kept in the eight raw data buffers
// are sent whole, one packet at a time, visiting the buffers in round-robin order and
// starting a packet only once it is completely stored; list-mode packets are
// discarded. In list-mode (mode = 1) the list-mode packets of the builder are sent and
// the raw buffers are emptied and discarded, so they never block the channels.
// The mode is sampled only between packets, so a switch never cuts a packet.
// Output: out_data/out_last/out_valid with out_ready back-pressure; out_src tells the
// raw buffer a word came from (8 for list-mode). raw_pkts/lm_pkts count packets sent.
// The two output forms follow the paper; the arbitration is this design's choice.
module output_select
  import jpet_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mode,
  input  logic [31:0] raw_data [N_CH],
  input  logic [N_CH-1:0] raw_last,
  input  logic [N_CH-1:0] raw_valid,
  input  logic [N_CH-1:0] raw_pkt_avail,
  output logic [N_CH-1:0] raw_ready,
  input  logic [31:0] lm_data,
  input  logic        lm_valid,
  input  logic        lm_last,
  output logic        lm_ready,
  output logic [31:0] out_data,
  output logic        out_last,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [3:0]  out_src,
  output logic [31:0] raw_pkts,
  output logic [31:0] lm_pkts
);
  typedef enum logic [1:0] {IDLE, RAW, LM} state_e;
  state_e     st_q;
  logic       mode_q;
  logic [2:0] c_q;

  always_comb begin
    raw_ready = '0;
    lm_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = '0;
    out_last  = 1'b0;
    out_src   = 4'd8;
    case (st_q)
      RAW: begin
        out_valid      = raw_valid[c_q];
        out_data       = raw_data[c_q];
        out_last       = raw_last[c_q];
        out_src        = {1'b0, c_q};
        raw_ready[c_q] = out_ready;
      end
      LM: begin
        out_valid = lm_valid;
        out_data  = lm_data;
        out_last  = lm_last;
        lm_ready  = out_ready;
      end
      default: ;
    endcase
    // discard the form that is not selected (only between its packets in IDLE/other)
    if (mode_q && st_q != RAW) raw_ready = '1;
    if (!mode_q && st_q != LM) lm_ready = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= IDLE; mode_q <= 1'b0; c_q <= '0; raw_pkts <= '0; lm_pkts <= '0;
    end else begin
      case (st_q)
        IDLE: begin
          mode_q <= mode;
          if (mode == mode_q) begin
            if (!mode_q) begin
              if (raw_pkt_avail[c_q]) st_q <= RAW;
              else c_q <= c_q + 3'd1;
            end else if (lm_valid) begin
              st_q <= LM;
            end
          end
        end
        RAW: if (raw_valid[c_q] && out_ready && raw_last[c_q]) begin
          st_q     <= IDLE;
          c_q      <= c_q + 3'd1;
          raw_pkts <= raw_pkts + 32'd1;
        end
        LM: if (lm_valid && out_ready && lm_last) begin
          st_q    <= IDLE;
          lm_pkts <= lm_pkts + 32'd1;
        end
        default: st_q <= IDLE;
      endcase
    end
  end
endmodule
