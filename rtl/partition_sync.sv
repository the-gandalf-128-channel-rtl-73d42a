// partition_sync: merges the 16 sampling clock domains into the system clock domain.
//
// The 16 TDC flip-flops cannot be copied to one register at one clock edge without
// violating setup and hold, so they are read in two stages through four partitions
// of five flip-flops. Neighbouring partitions share their border flip-flop, so that
// every pair of adjacent samples lies inside one partition and no bitswap is lost:
//   partition 0: q[0..4]   (rising clk(0..4))
//   partition 1: q[4..8]   (rising clk(4..7), falling clk(0))
//   partition 2: q[8..12]  (falling clk(0..4))
//   partition 3: q[12..15] and q[0] of the following period (falling clk(4..7), rising clk(0))
// Stage one captures each partition on an edge that comes at least 4 bins after its
// last sample and at least 4 bins before its first sample changes again:
// partition 0 on falling clk(0) (phase 8), partition 1 on falling clk(4) (phase 12),
// partition 2 on rising clk(4) (phase 4 of the next period), partition 3 on
// falling clk(0) (phase 8 of the next period). Stage two copies all four into the
// system clock domain on rising clk(0); partitions 0 and 1 get one extra register so
// that all four outputs describe the same clock period.
//
// Timing: the frame whose phase 0 is the rising clk(0) edge number m appears on
// part[] right after edge m+2 (latency two system clock periods).
// Interface: clk_ph[7:0], q[15:0] from tdc_sampler, part[4] of 5 bits (bit j of
// partition p is sample 4p+j). The grouping follows the published design; the
// capture edges and the alignment registers are this design's own choice.
module partition_sync
  import tdc_pkg::*;
(
  input  logic [NPHASE-1:0]            clk_ph,
  input  logic [NBINS-1:0]             q,
  output logic [NPART-1:0][PART_W-1:0] part
);

  logic [PART_W-1:0] p0, p1, p2, p3;        // stage one
  logic [PART_W-1:0] s0, s1, d0, d1;        // stage two, partitions 0/1 delayed once more
  logic [PART_W-1:0] s2, s3;

  always_ff @(negedge clk_ph[0]) p0 <= q[4:0];
  always_ff @(negedge clk_ph[4]) p1 <= q[8:4];
  always_ff @(posedge clk_ph[4]) p2 <= q[12:8];
  always_ff @(negedge clk_ph[0]) p3 <= {q[0], q[15:12]};

  always_ff @(posedge clk_ph[0]) begin
    s0 <= p0;
    s1 <= p1;
    d0 <= s0;
    d1 <= s1;
    s2 <= p2;
    s3 <= p3;
  end

  assign part[0] = d0;
  assign part[1] = d1;
  assign part[2] = s2;
  assign part[3] = s3;

endmodule
