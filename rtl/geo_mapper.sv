// geo_mapper: assigns detector geometry to a hit of one decomposition channel.
//
// The stream index (CH_IDX) fixes layer, side and strip range (one J-PET segment per
// stream):
//   stream 0/1 : layer 1, side A/B, strips 1-48      stream 4/5 : layer 3, side A/B, strips 1-48
//   stream 2/3 : layer 2, side A/B, strips 1-48      stream 6/7 : layer 3, side A/B, strips 49-96
// Inside a stream the 192 TDC channels cover 48 strips x 4 thresholds; this design
// assumes TDC channel n belongs to local strip n/4 and threshold n%4 (0 = lowest).
// X and Y of the strip come from a 192-entry ROM (rtl/geo_xy.hex, {x[15:0], y[15:0]}
// in mm) indexed by layer and strip: entry i holds (R cos a, R sin a) with
//   i = 0..47    layer 1, R = 425 mm,   a = 7.5 deg * i
//   i = 48..95   layer 2, R = 467.5 mm, a = 3.75 deg + 7.5 deg * (i-48)
//   i = 96..191  layer 3, R = 575 mm,   a = 1.875 deg + 3.75 deg * (i-96)
// Radii and angles are the J-PET barrel as published elsewhere, not given here.
// Timing: one register stage; in_end is delayed with the data.
module geo_mapper
  import jpet_pkg::*;
#(
  parameter logic [2:0] CH_IDX = 3'd0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [7:0]  in_tdc_ch,
  input  time_t       in_t,
  input  logic [WIDTH_W-1:0] in_width,
  input  logic        in_end,
  output logic        out_valid,
  output hit_t        out_hit,
  output logic        out_end
);
  logic [31:0] rom [192];
  initial $readmemh("rtl/geo_xy.hex", rom);

  localparam logic [1:0] LAYER = (CH_IDX < 3'd2) ? 2'd1 : (CH_IDX < 3'd4) ? 2'd2 : 2'd3;
  localparam logic [6:0] STRIP_BASE = (CH_IDX >= 3'd6) ? 7'd48 : 7'd0;
  localparam logic [7:0] ROM_BASE = (LAYER == 2'd1) ? 8'd0 : (LAYER == 2'd2) ? 8'd48 : 8'd96;

  logic [6:0] strip0;     // 0-based strip within the layer
  logic [7:0] rom_idx;
  logic [5:0] local_strip;
  assign local_strip = in_tdc_ch[7:2];
  assign strip0      = STRIP_BASE + 7'(local_strip);
  assign rom_idx     = ROM_BASE + 8'(strip0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_hit   <= '0;
      out_end   <= 1'b0;
    end else begin
      out_valid      <= in_valid;
      out_end        <= in_end;
      out_hit.ch     <= CH_IDX;
      out_hit.layer  <= LAYER;
      out_hit.side   <= CH_IDX[0];
      out_hit.strip  <= strip0 + 7'd1;
      out_hit.thr    <= in_tdc_ch[1:0];
      out_hit.tdc_ch <= in_tdc_ch;
      out_hit.t      <= in_t;
      out_hit.width  <= in_width;
      out_hit.x      <= rom[rom_idx][31:16];
      out_hit.y      <= rom[rom_idx][15:0];
    end
  end
endmodule
