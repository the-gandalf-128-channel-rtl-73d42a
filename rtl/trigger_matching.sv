// trigger_matching: the trigger matching unit of one F1-block.
//
// For every trigger timestamp waiting in the trigger FIFO the unit builds one event
// fragment in the output FIFO: a header word, one data word per hit that falls into
// the trigger window, and a trailer word with the number of words. The window is
//   [ws, ws + width)  with  ws = trigger time - latency   (all in TDC bins),
// so a window of width <= latency lies entirely before the trigger and a larger one
// reaches past it. Because hits in a buffer are in time order, the unit handles the
// eight channels one after the other: from the head of a channel's hit buffer it
// deletes hits older than ws, copies hits inside the window (and removes them), and
// moves to the next channel at the first later hit or when the buffer is empty.
// Before it starts, the unit waits until the window end lies MARGIN clock periods in
// the past, so that every hit of the window has passed the channel pipeline.
// While no trigger is pending, every channel deletes in parallel the hits older than
// now - latency - MARGIN periods: no later trigger can select them any more, which
// keeps the 1k hit buffers from filling up.
// All time comparisons are modulo 2**TS_W (signed differences).
//
// Interface: trigger FIFO read side (trig_empty, trig_time, trig_pop); hit buffer
// heads of the 8 channels (hb_valid, hb_data, hb_pop); output FIFO write side
// (out_full, out_push, out_data); now = clock counter; latency and width set the
// window. Timing: at most one word is written and one hit removed per clock.
// Selecting hits by window, deleting old hits and working one channel at a time
// follow the published design; the window definition, the waiting margin, the
// removal of matched hits (overlapping windows do not share hits) and the word
// format (tdc_pkg) are this design's own.
module trigger_matching
  import tdc_pkg::*;
#(
  parameter int          CH       = CH_PER_BLOCK,
  parameter logic [3:0]  BLOCK_ID = 4'd0,
  parameter int          MARGIN   = 8
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [COARSE_W-1:0]  now,
  input  ts_t                  latency,
  input  ts_t                  width,
  input  logic                 trig_empty,
  input  ts_t                  trig_time,
  output logic                 trig_pop,
  input  logic [CH-1:0]        hb_valid,
  input  hit_t [CH-1:0]        hb_data,
  output logic [CH-1:0]        hb_pop,
  input  logic                 out_full,
  output logic                 out_push,
  output word_t                out_data,
  output logic [15:0]          n_events
);

  localparam int CW = $clog2(CH);

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_HEADER, S_SCAN, S_TRAILER} state_e;

  state_e          state;
  ts_t             ws;                 // window start
  logic [CW-1:0]   ch;
  logic [15:0]     nwords;
  logic [5:0]      evt;

  ts_t             now_ts, old_lim, win_end_age, d;
  logic            head_old, head_in;

  ts_t [CH-1:0]    head_age;            // head hit time relative to old_lim

  for (genvar c = 0; c < CH; c++) begin : g_age
    assign head_age[c] = hb_data[c].time_ - old_lim;
  end

  assign now_ts      = {now, {FINE_W{1'b0}}};
  assign old_lim     = now_ts - latency - ts_t'(MARGIN * NBINS);
  assign win_end_age = now_ts - (ws + width);
  assign d           = hb_data[ch].time_ - ws;
  assign head_old    = d[TS_W-1];                        // before the window
  assign head_in     = !d[TS_W-1] && (d < width);        // inside the window

  always_comb begin
    hb_pop   = '0;
    trig_pop = 1'b0;
    out_push = 1'b0;
    out_data = '0;
    unique case (state)
      S_IDLE: begin
        if (trig_empty) begin
          for (int c = 0; c < CH; c++) hb_pop[c] = hb_valid[c] && head_age[c][TS_W-1];
        end
      end
      S_HEADER: begin
        out_push = !out_full;
        out_data = {W_HEADER, BLOCK_ID, evt, trig_time};
      end
      S_SCAN: begin
        if (hb_valid[ch]) begin
          if (head_old) begin
            hb_pop[ch] = 1'b1;
          end else if (head_in && !out_full) begin
            hb_pop[ch] = 1'b1;
            out_push   = 1'b1;
            out_data   = {W_DATA, BLOCK_ID, 3'(ch), hb_data[ch].lead, 2'b00, d};
          end
        end
      end
      S_TRAILER: begin
        out_push = !out_full;
        out_data = {W_TRAILER, BLOCK_ID, evt, 4'b0, nwords + 16'd1};
        trig_pop = !out_full;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      ws       <= '0;
      ch       <= '0;
      nwords   <= '0;
      evt      <= '0;
      n_events <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (!trig_empty) begin
          ws    <= trig_time - latency;
          state <= S_WAIT;
        end
        S_WAIT: begin
          // wait until the window end is MARGIN periods old
          if (!win_end_age[TS_W-1] && win_end_age >= ts_t'(MARGIN * NBINS))
            state <= S_HEADER;
        end
        S_HEADER: if (!out_full) begin
          nwords <= 16'd1;
          ch     <= '0;
          state  <= S_SCAN;
        end
        S_SCAN: begin
          if (out_push) nwords <= nwords + 16'd1;
          if (!hb_valid[ch] || (!head_old && !head_in)) begin
            if (ch == CW'(CH - 1)) state <= S_TRAILER;
            else                   ch    <= ch + 1'b1;
          end
        end
        S_TRAILER: if (!out_full) begin
          evt      <= evt + 6'd1;
          n_events <= n_events + 16'd1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
