// ror_dispatcher: hit buffers and timebin filter in front of the 32 ROR processors.
//
// While a timeslot streams through the coincidence search, the same lowest-threshold
// hits are written into eight hit buffers, one per stream; the end of the timeslot is
// written into each buffer as a marker entry one cycle after ts_end. The coincidence
// result (timebin mask) is queued. When a result is waiting and all ROR processors are
// idle, the dispatcher reads buffer 0 up to its marker, then buffer 1, ... buffer 7,
// one entry per cycle. A hit whose timebin bit is set in the mask is handed to the
// processor of that timebin (valid/ready, one-hot proc_valid); all other hits are
// dropped as noise and counted. After the eighth marker, `flush` pulses once: every
// processor then pairs what it holds. The dispatcher then waits until all processors
// are idle and all ROR output has left (pipe_empty) and pulses ts_done with the
// timeslot number, which closes the list-mode packet of that timeslot.
// can_accept tells the combiner a new timeslot fits (room for HIT_DEPTH/2 hits per
// buffer and a free result slot).
// Buffers, mask filtering and routing by timebin follow the paper. Reading the buffers
// one after another, and waiting for idle processors, are this design's choices.
module ror_dispatcher
  import jpet_pkg::*;
#(
  parameter int unsigned HIT_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [N_CH-1:0] in_valid,
  input  hit_t        in_hit [N_CH],
  input  logic        ts_end,
  input  logic        res_valid,
  input  logic [31:0] res_ts,
  input  logic [N_TB-1:0] res_mask,
  output logic        can_accept,
  output logic [N_TB-1:0] proc_valid,
  output hit_t        proc_hit,
  input  logic [N_TB-1:0] proc_ready,
  input  logic [N_TB-1:0] proc_idle,
  output logic        flush,
  input  logic        pipe_empty,
  output logic        ts_done,
  output logic [31:0] ts_done_num,
  output logic [31:0] pass_count,
  output logic [31:0] noise_count,
  output logic [15:0] overflow_count
);
  localparam int unsigned EW = $bits(hit_t) + 1;
  typedef enum logic [1:0] {IDLE, READ, WAIT_DONE} state_e;

  state_e          st_q;
  logic [2:0]      k_q;
  logic            mark_q;
  logic [EW-1:0]   f_out [N_CH];
  logic [N_CH-1:0] f_empty, f_full, f_drop, f_pop, f_push;
  logic [$clog2(HIT_DEPTH):0] f_count [N_CH];
  logic [EW-1:0]   f_in [N_CH];
  logic [N_CH-1:0] room;

  for (genvar c = 0; c < N_CH; c++) begin : g_buf
    assign f_push[c] = mark_q || (in_valid[c] && in_hit[c].thr == 2'd0);
    assign f_in[c]   = mark_q ? {1'b1, $bits(hit_t)'(0)} : {1'b0, in_hit[c]};
    assign room[c]   = f_count[c] < ($clog2(HIT_DEPTH)+1)'(HIT_DEPTH / 2);
    sync_fifo #(.W(EW), .DEPTH(HIT_DEPTH)) u_fifo (
      .clk, .rst_n, .push(f_push[c]), .in_data(f_in[c]), .pop(f_pop[c]),
      .out_data(f_out[c]), .empty(f_empty[c]), .full(f_full[c]), .drop(f_drop[c]),
      .count(f_count[c]));
  end

  // result queue
  logic [31+N_TB:0] q_out;
  logic             q_empty, q_full, q_pop, q_drop;
  logic [2:0]       q_count;
  sync_fifo #(.W(32 + N_TB), .DEPTH(4)) u_resq (
    .clk, .rst_n, .push(res_valid), .in_data({res_ts, res_mask}), .pop(q_pop),
    .out_data(q_out), .empty(q_empty), .full(q_full), .drop(q_drop), .count(q_count));

  assign can_accept = (&room) && (q_count < 3'd3);

  // head of the buffer being read
  logic     head_mark;
  hit_t     head_hit;
  tb_idx_t  head_tb;
  logic     head_pass;
  assign head_mark = f_out[k_q][EW-1];
  assign head_hit  = f_out[k_q][EW-2:0];
  assign head_tb   = timebin_of(head_hit.t);
  logic [N_TB-1:0] head_mask;
  assign head_mask = q_out[N_TB-1:0];
  assign head_pass = head_mask[head_tb];
  assign proc_hit  = head_hit;

  always_comb begin
    f_pop      = '0;
    proc_valid = '0;
    if (st_q == READ && !f_empty[k_q]) begin
      if (head_mark) begin
        f_pop[k_q] = 1'b1;
      end else if (head_pass) begin
        proc_valid[head_tb] = 1'b1;
        f_pop[k_q] = proc_ready[head_tb];
      end else begin
        f_pop[k_q] = 1'b1;
      end
    end
  end
  assign q_pop = flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= IDLE; k_q <= '0; mark_q <= 1'b0; flush <= 1'b0;
      ts_done <= 1'b0; ts_done_num <= '0;
      pass_count <= '0; noise_count <= '0; overflow_count <= '0;
    end else begin
      mark_q  <= ts_end;
      flush   <= 1'b0;
      ts_done <= 1'b0;
      if (|f_drop && overflow_count != 16'hFFFF) overflow_count <= overflow_count + 16'd1;
      case (st_q)
        IDLE: if (!q_empty && (&proc_idle)) begin
          st_q <= READ;
          k_q  <= '0;
        end
        READ: if (!f_empty[k_q]) begin
          if (head_mark) begin
            if (k_q == 3'(N_CH - 1)) begin
              flush       <= 1'b1;
              ts_done_num <= q_out[31+N_TB:N_TB];
              st_q        <= WAIT_DONE;
            end
            k_q <= k_q + 3'd1;
          end else if (head_pass) begin
            if (proc_ready[head_tb]) pass_count <= pass_count + 32'd1;
          end else begin
            noise_count <= noise_count + 32'd1;
          end
        end
        WAIT_DONE: if (!flush && (&proc_idle) && pipe_empty) begin
          ts_done <= 1'b1;
          st_q    <= IDLE;
        end
        default: st_q <= IDLE;
      endcase
    end
  end

  // a hit may only be offered to a processor that exists and only one at a time
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(proc_valid));
endmodule
