// hit_search: finds edges in the partition words and time-stamps them.
//
// Each partition word (5 samples) is tested for a pattern other than all zeros or
// all ones. Inside a partition that changes, every adjacent sample pair (4p+j,
// 4p+j+1) with 0 -> 1 is a leading edge and with 1 -> 0 a trailing edge. The edge
// position k = 4p+j is the last sample before the swap, so the edge lies in bin k of
// the clock period and its time is  coarse_frame * 16 + k  (in bins). Because the
// partitions share their border samples, every pair of adjacent samples is tested
// exactly once. Leading and trailing sensitivity can be enabled separately.
//
// Per clock period at most one leading and one trailing edge are reported, the
// earliest of each; a second edge of the same kind within one 2.6 ns period (a pulse
// shorter than a clock period repeated within it) is beyond the double-pulse
// resolution of this design and is ignored. The two reported hits come out ordered in
// time on hit_a (earlier) and hit_b.
//
// Timing: registered outputs, one clk cycle after part[] changes. coarse is the
// free-running clock counter; the partition words lag it by LAT clock periods
// (partition_sync latency), which is subtracted here, so the time refers to the
// period in which the input was sampled.
// The bitswap search and the time formula follow the published design (its figure
// gives clk_counter * 8 + position for the 8-bin example); the two-hit limit is this
// design's own choice.
module hit_search
  import tdc_pkg::*;
#(
  parameter int LAT = 2
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [NPART-1:0][PART_W-1:0] part,
  input  logic [COARSE_W-1:0]          coarse,
  input  logic                         lead_en,
  input  logic                         trail_en,
  output hit_t                         hit_a,
  output logic                         hit_a_v,
  output hit_t                         hit_b,
  output logic                         hit_b_v
);

  logic                lead_f, trail_f;
  logic [FINE_W-1:0]   lead_k, trail_k;
  logic [COARSE_W-1:0] frame;

  always_comb begin
    lead_f  = 1'b0;
    trail_f = 1'b0;
    lead_k  = '0;
    trail_k = '0;
    for (int p = NPART - 1; p >= 0; p--) begin
      // a partition holding only 0s or only 1s contains no bitswap
      if (part[p] != '0 && part[p] != '1) begin
        for (int j = PART_W - 2; j >= 0; j--) begin
          if (!part[p][j] && part[p][j+1]) begin
            lead_f = 1'b1;
            lead_k = FINE_W'(4 * p + j);
          end
          if (part[p][j] && !part[p][j+1]) begin
            trail_f = 1'b1;
            trail_k = FINE_W'(4 * p + j);
          end
        end
      end
    end
    lead_f  &= lead_en;
    trail_f &= trail_en;
  end

  assign frame = coarse - COARSE_W'(LAT);

  always_ff @(posedge clk) begin
    if (rst) begin
      hit_a_v <= 1'b0;
      hit_b_v <= 1'b0;
      hit_a   <= '0;
      hit_b   <= '0;
    end else begin
      hit_a_v <= lead_f | trail_f;
      hit_b_v <= lead_f & trail_f;
      if (lead_f && (!trail_f || lead_k < trail_k)) begin
        hit_a <= '{lead: 1'b1, time_: {frame, lead_k}};
        hit_b <= '{lead: 1'b0, time_: {frame, trail_k}};
      end else begin
        hit_a <= '{lead: 1'b0, time_: {frame, trail_k}};
        hit_b <= '{lead: 1'b1, time_: {frame, lead_k}};
      end
    end
  end

endmodule
