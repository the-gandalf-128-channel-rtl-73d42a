// tdc_pkg: constants and types shared by the 128-channel shifted-clock-sampling TDC.
//
// The TDC divides one period of the 388.8 MHz system clock into 16 bins of about
// 160 ps. A hit time is counted in bins: the upper COARSE_W bits are the clock
// counter, the lower 4 bits the bin inside the period. The number of bins, phases,
// partitions, channels per F1-block, F1-blocks and the 1k hit-buffer depth follow
// the published design; the 16-bit counter, the 20-bit time and the 32-bit data
// word layout are this design's own choices (the published design reuses the data
// format of the F1 TDC chip, which is not reproduced here).
//
// Data words written by the trigger matching unit (bits 31:30 give the type):
//   header  : 2'b10, block[29:26], event[25:20], trigger time[19:0]
//   data    : 2'b00, block[29:26], channel[25:23], edge[22] (1 = leading), 2'b00,
//             hit time relative to the window start[19:0]
//   trailer : 2'b11, block[29:26], event[25:20], 4'b0, word count of the event[15:0]
package tdc_pkg;

  localparam int NBINS        = 16;   // TDC bins per clock period
  localparam int NPHASE       = 8;    // phase-shifted clocks clk(0..7)
  localparam int NPART        = 4;    // partitions of the TDC register
  localparam int PART_W       = 5;    // flip-flops read by one partition
  localparam int CH_PER_BLOCK = 8;    // channels per F1-block
  localparam int NBLOCKS      = 16;   // F1-blocks
  localparam int NCHAN        = CH_PER_BLOCK * NBLOCKS;
  localparam int COARSE_W     = 16;   // clock counter width
  localparam int FINE_W       = 4;    // log2(NBINS)
  localparam int TS_W         = COARSE_W + FINE_W;
  localparam int HITBUF_DEPTH = 1024;

  typedef logic [TS_W-1:0] ts_t;

  // One detected edge.
  typedef struct packed {
    logic lead;   // 1: leading (0 -> 1) edge, 0: trailing edge
    ts_t  time_;  // time in TDC bins
  } hit_t;

  localparam int HIT_W = $bits(hit_t);

  typedef enum logic [1:0] {
    W_DATA    = 2'b00,
    W_HEADER  = 2'b10,
    W_TRAILER = 2'b11
  } word_type_e;

  typedef logic [31:0] word_t;

endpackage
