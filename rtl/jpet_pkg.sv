// jpet_pkg: types and constants shared by the J-PET timeslot processing chain.
//
// The chain receives eight TRB data streams, one per scanner segment, turns TDC words
// into calibrated hits with detector coordinates, searches single-strip and multi-strip
// coincidences per 625 ns timebin and reconstructs Region-Of-Response (ROR) points.
// Numbers taken from the paper: 8 streams, 32 timebins of 625 ns in a 20 us timeslot,
// 48 strips per stream, 4 thresholds, 200 MHz core clock, 10 ns pair time filter.
// Word layouts, coordinate units and geometry constants are choices of this design
// and are documented where they are defined.
package jpet_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_CH        = 8;    // decomposition channels (input streams)
  localparam int unsigned N_TB        = 32;   // timebins per timeslot
  localparam int unsigned N_STRIP     = 48;   // strips handled by one channel
  localparam int unsigned N_EP        = 4;    // TDC endpoints (peripheral FPGAs) per TRB
  localparam int unsigned N_TDC_CH    = 48;   // hit channels per TDC endpoint (1..48, 0 = reference)
  localparam int unsigned N_CHAN      = N_EP * N_TDC_CH;  // 192 TDC channels per stream
  localparam int unsigned N_PAIR      = N_CH / 2;         // side A / side B array pairs

  // ---------------------------------------------------------------- time
  // All hit times are in picoseconds relative to the timeslot reference marker.
  localparam int unsigned TIME_W       = 25;          // 2^25 ps = 33.5 us > 20 us
  localparam int unsigned TIMESLOT_PS  = 20_000_000;  // 20 us
  localparam int unsigned TIMEBIN_PS   = 625_000;     // 625 ns
  localparam int unsigned COARSE_PS    = 5_000;       // coarse counter period 5 ns
  localparam int unsigned PAIR_WIN_PS  = 10_000;      // ROR pair filter, < 10 ns
  localparam int unsigned WIDTH_W      = 20;          // time-over-threshold, ps

  typedef logic [TIME_W-1:0]  time_t;
  typedef logic [$clog2(N_TB)-1:0] tb_idx_t;

  // ---------------------------------------------------------------- coordinates
  // Coordinates are signed millimetres, origin on the scanner axis at the strip centre.
  typedef logic signed [15:0] coord_t;

  // ---------------------------------------------------------------- TRB3 TDC words
  // hit word  : [31]=1, [28:22] channel, [21:12] fine, [11] edge (1 = leading), [10:0] coarse
  // epoch word: [31:29]=3'b011, [27:0] epoch
  localparam logic [2:0] EPOCH_MARK = 3'b011;

  // ---------------------------------------------------------------- hit record
  typedef struct packed {
    logic [2:0]  ch;       // decomposition channel (stream) 0..7
    logic [1:0]  layer;    // 1..3
    logic        side;     // 0 = side A, 1 = side B
    logic [6:0]  strip;    // 1..96 within the layer
    logic [1:0]  thr;      // threshold 0..3 (0 = lowest)
    logic [7:0]  tdc_ch;   // TDC channel within the stream 0..191
    time_t       t;        // leading edge time within the timeslot, ps
    logic [WIDTH_W-1:0] width; // trailing minus leading, ps
    coord_t      x;
    coord_t      y;
  } hit_t;

  // ---------------------------------------------------------------- ROR point
  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t z;
  } ror_point_t;

  // ---------------------------------------------------------------- control writes
  typedef struct packed {
    logic        we;
    logic [15:0] addr;
    logic [31:0] data;
  } cfg_wr_t;

  // Register map (word addresses)
  //   0x0000                     output mode: 0 = raw data, 1 = list-mode
  //   0x1000 + ch*0x200 + n      n < 192: signed time offset (ps) of TDC channel n
  //   0x1000 + ch*0x200 + 0x100  fine-time minimum bin
  //   0x1000 + ch*0x200 + 0x101  fine-time scale, ps per bin in Q12
  localparam logic [15:0] REG_MODE = 16'h0000;
  localparam logic [15:0] REG_CH_BASE = 16'h1000;

  // Timebin of a time: number of timebin boundaries at or below t (exact, no division)
  function automatic tb_idx_t timebin_of(time_t t);
    tb_idx_t n = '0;
    for (int k = 1; k < N_TB; k++)
      if (t >= time_t'(k * TIMEBIN_PS)) n = tb_idx_t'(k);
    return n;
  endfunction

endpackage
