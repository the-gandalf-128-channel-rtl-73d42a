// f1_block: eight TDC channels sharing one trigger matching unit ("F1-block").
//
// The 128 channels are grouped in 16 identical F1-blocks so that data collection
// happens in two steps: inside the block, the trigger matching unit merges the hits
// of its 8 channels into one event fragment per trigger; afterwards the event
// collector merges the 16 blocks. A block holds:
//   - 8 tdc_channel instances (TDC register, partitions, hit search, clock counter,
//     1k hit buffer),
//   - the trigger FIFO: the trigger input, synchronous to clk(0), is time-stamped
//     with the block's clock counter (bin 0 of the period in which it was seen) and
//     queued; a trigger arriving while it is full is dropped and trig_overflow set,
//   - the trigger matching unit, writing into the output FIFO,
//   - the S-Link FIFO, a dual-clock FIFO into the S-Link clock domain, filled from
//     the output FIFO whenever it has room.
// All logic except the S-Link FIFO's read side runs on clk_ph[0]. rst is
// synchronous to clk_ph[0], s_rst to s_clk.
// The block structure follows the published design; the FIFO depths, the trigger
// time-stamping and the FIFO-to-FIFO transfer are this design's own choices.
module f1_block
  import tdc_pkg::*;
#(
  parameter int         CH         = CH_PER_BLOCK,
  parameter logic [3:0] BLOCK_ID   = 4'd0,
  parameter int         TRIG_DEPTH = 64,
  parameter int         OUT_DEPTH  = 512,
  parameter int         SL_DEPTH   = 256
) (
  input  logic [NPHASE-1:0] clk_ph,
  input  logic              rst,
  input  logic [CH-1:0]     din,
  input  logic              trigger,
  input  logic              lead_en,
  input  logic              trail_en,
  input  ts_t               latency,
  input  ts_t               width,
  input  logic              s_clk,
  input  logic              s_rst,
  input  logic              s_pop,
  output word_t             s_dout,
  output logic              s_empty,
  output logic [CH-1:0]     hit_overflow,
  output logic              trig_overflow,
  output logic [15:0]       n_events
);

  logic                clk;
  logic [COARSE_W-1:0] now;
  hit_t  [CH-1:0]      hb_data;
  logic  [CH-1:0]      hb_valid, hb_pop;
  logic                trig_full, trig_empty, trig_pop;
  ts_t                 trig_time;
  logic                out_full, out_push, out_empty, out_pop;
  word_t               out_data, out_dout;
  logic                sl_full;

  assign clk = clk_ph[0];

  for (genvar c = 0; c < CH; c++) begin : g_ch
    tdc_channel u_ch (
      .din(din[c]), .clk_ph(clk_ph), .rst(rst),
      .lead_en(lead_en), .trail_en(trail_en),
      .rd_data(hb_data[c]), .rd_valid(hb_valid[c]), .rd_pop(hb_pop[c]),
      .overflow(hit_overflow[c])
    );
  end

  clock_counter #(.W(COARSE_W)) u_cnt (.clk(clk), .rst(rst), .count(now));

  sync_fifo #(.W(TS_W), .DEPTH(TRIG_DEPTH)) u_trig_fifo (
    .clk(clk), .rst(rst),
    .push(trigger && !trig_full), .din({now, {FINE_W{1'b0}}}), .full(trig_full),
    .pop(trig_pop), .dout(trig_time), .empty(trig_empty), .count()
  );

  always_ff @(posedge clk) begin
    if (rst)                       trig_overflow <= 1'b0;
    else if (trigger && trig_full) trig_overflow <= 1'b1;
  end

  trigger_matching #(.CH(CH), .BLOCK_ID(BLOCK_ID)) u_tmu (
    .clk(clk), .rst(rst), .now(now), .latency(latency), .width(width),
    .trig_empty(trig_empty), .trig_time(trig_time), .trig_pop(trig_pop),
    .hb_valid(hb_valid), .hb_data(hb_data), .hb_pop(hb_pop),
    .out_full(out_full), .out_push(out_push), .out_data(out_data),
    .n_events(n_events)
  );

  sync_fifo #(.W(32), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk(clk), .rst(rst),
    .push(out_push), .din(out_data), .full(out_full),
    .pop(out_pop), .dout(out_dout), .empty(out_empty), .count()
  );

  assign out_pop = !out_empty && !sl_full;

  async_fifo #(.W(32), .DEPTH(SL_DEPTH)) u_slink_fifo (
    .wclk(clk), .wrst(rst), .push(out_pop), .din(out_dout), .full(sl_full),
    .rclk(s_clk), .rrst(s_rst), .pop(s_pop), .dout(s_dout), .empty(s_empty)
  );

endmodule
