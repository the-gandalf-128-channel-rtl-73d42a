// gandalf_tdc: 128-channel shifted-clock-sampling TDC with trigger matching and
// S-Link readout.
//
// Each of the 128 inputs is sampled by 16 flip-flops on the rising and falling
// edges of eight clocks clk(0..7), shifted by 1/16 of the 388.8 MHz period, giving
// 160 ps bins. The samples are merged into the clk(0) domain through four partitions,
// searched for leading and/or trailing edges and stored as timestamps in a 1k hit
// buffer per channel. The channels form 16 F1-blocks of 8; each block matches its
// hits against the triggers and writes one event fragment per trigger. The event
// collector sends the 16 fragments of every event, framed by a header and trailer
// control word, to the S-Link port.
//
// Clocks: clk_ph[7:0] come from the clock management (two PLLs in the FPGA);
// clk_ph[0] is also the system clock of all TDC logic. slink_clk clocks the
// collector and the S-Link port. rst is synchronous to clk_ph[0], slink_rst to
// slink_clk. trigger is a clk_ph[0]-synchronous pulse (one period per trigger).
// lead_en/trail_en select the edge sensitivity, latency and width (in bins) the
// trigger window [trigger - latency, trigger - latency + width).
// The partitioning into F1-blocks and their content follow the published design;
// configuration through ports instead of a VME register file is this design's own.
module gandalf_tdc
  import tdc_pkg::*;
#(
  parameter int NBLK = NBLOCKS
) (
  input  logic [NPHASE-1:0]            clk_ph,
  input  logic                         rst,
  input  logic [NBLK*CH_PER_BLOCK-1:0] din,
  input  logic                         trigger,
  input  logic                         lead_en,
  input  logic                         trail_en,
  input  ts_t                          latency,
  input  ts_t                          width,
  input  logic                         slink_clk,
  input  logic                         slink_rst,
  input  logic                         slink_full,
  output word_t                        slink_data,
  output logic                         slink_wen,
  output logic                         slink_ctrl,
  output logic [NBLK*CH_PER_BLOCK-1:0] hit_overflow,
  output logic [NBLK-1:0]              trig_overflow,
  output logic [23:0]                  n_events
);

  logic  [NBLK-1:0] f_empty, f_pop;
  word_t [NBLK-1:0] f_dout;

  for (genvar b = 0; b < NBLK; b++) begin : g_blk
    f1_block #(.BLOCK_ID(4'(b))) u_blk (
      .clk_ph(clk_ph), .rst(rst),
      .din(din[b*CH_PER_BLOCK +: CH_PER_BLOCK]),
      .trigger(trigger), .lead_en(lead_en), .trail_en(trail_en),
      .latency(latency), .width(width),
      .s_clk(slink_clk), .s_rst(slink_rst),
      .s_pop(f_pop[b]), .s_dout(f_dout[b]), .s_empty(f_empty[b]),
      .hit_overflow(hit_overflow[b*CH_PER_BLOCK +: CH_PER_BLOCK]),
      .trig_overflow(trig_overflow[b]),
      .n_events()
    );
  end

  event_collector #(.NBLK(NBLK)) u_coll (
    .clk(slink_clk), .rst(slink_rst),
    .f_empty(f_empty), .f_dout(f_dout), .f_pop(f_pop),
    .slink_full(slink_full),
    .slink_data(slink_data), .slink_wen(slink_wen), .slink_ctrl(slink_ctrl),
    .n_events(n_events)
  );

endmodule
