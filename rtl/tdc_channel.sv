// tdc_channel: one complete TDC channel.
//
// The input is sampled by the 16-flip-flop TDC register (tdc_sampler), merged into
// the clk(0) domain through four partitions (partition_sync), searched for edges
// (hit_search), time-stamped with the channel's clock counter and stored in the 1k
// hit buffer, whose read side goes to the trigger matching unit of the F1-block.
//
// Timing: an edge in bin k of clock period n yields the time n*16 + k, counted from
// the rising clk(0) edge after which rst was first seen low; it reaches the hit
// buffer output about five clock periods after it occurred. clk(0) is the system
// clock. The structure follows the published channel diagram.
module tdc_channel
  import tdc_pkg::*;
(
  input  logic              din,
  input  logic [NPHASE-1:0] clk_ph,
  input  logic              rst,
  input  logic              lead_en,
  input  logic              trail_en,
  output hit_t              rd_data,
  output logic              rd_valid,
  input  logic              rd_pop,
  output logic              overflow
);

  logic                         clk;
  logic [NBINS-1:0]             q;
  logic [NPART-1:0][PART_W-1:0] part;
  logic [COARSE_W-1:0]          coarse;
  hit_t                         hit_a, hit_b;
  logic                         hit_a_v, hit_b_v;

  assign clk = clk_ph[0];

  tdc_sampler u_sampler (.din(din), .clk_ph(clk_ph), .q(q));

  partition_sync u_sync (.clk_ph(clk_ph), .q(q), .part(part));

  clock_counter #(.W(COARSE_W)) u_cnt (.clk(clk), .rst(rst), .count(coarse));

  hit_search u_search (
    .clk(clk), .rst(rst), .part(part), .coarse(coarse),
    .lead_en(lead_en), .trail_en(trail_en),
    .hit_a(hit_a), .hit_a_v(hit_a_v), .hit_b(hit_b), .hit_b_v(hit_b_v)
  );

  hit_buffer u_buf (
    .clk(clk), .rst(rst),
    .wr_a(hit_a), .wr_a_v(hit_a_v), .wr_b(hit_b), .wr_b_v(hit_b_v),
    .rd_data(rd_data), .rd_valid(rd_valid), .rd_pop(rd_pop), .overflow(overflow)
  );

endmodule
