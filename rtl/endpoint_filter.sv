// endpoint_filter: keeps only the TDC data of the endpoints assigned to this channel.
//
// Each TRB board carries four TDC endpoints, each identified by a 16-bit device ID in
// its subevent header. A decomposition channel is assigned N_EP consecutive device IDs
// starting at BASE_DEV (set per instance at synthesis time, as the paper's generics
// assign addresses). Words of other devices (for example the board's central FPGA or
// a misrouted stream) are removed and counted. Passed words carry the endpoint index
// 0..N_EP-1 that the geometry mapping needs.
// One register stage: outputs follow the inputs by one cycle; in_end is passed on
// in step with the data so the end-of-timeslot marker stays behind the last word.
// The block's name and position come from the paper; the consecutive-ID rule is this
// design's choice.
module endpoint_filter #(
  parameter logic [15:0] BASE_DEV = 16'h0100,
  parameter int unsigned N_EP     = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] in_word,
  input  logic [15:0] in_dev,
  input  logic        in_end,
  output logic        out_valid,
  output logic [31:0] out_word,
  output logic [$clog2(N_EP)-1:0] out_ep,
  output logic        out_end,
  output logic [15:0] reject_count
);
  logic [15:0] rel;
  logic        match;
  assign rel   = in_dev - BASE_DEV;
  assign match = (in_dev >= BASE_DEV) && (rel < 16'(N_EP));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      out_word     <= '0;
      out_ep       <= '0;
      out_end      <= 1'b0;
      reject_count <= '0;
    end else begin
      out_valid <= in_valid && match;
      out_word  <= in_word;
      out_ep    <= rel[$clog2(N_EP)-1:0];
      out_end   <= in_end;
      if (in_valid && !match && reject_count != 16'hFFFF) reject_count <= reject_count + 16'd1;
    end
  end
endmodule
