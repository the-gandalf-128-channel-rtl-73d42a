`timescale 1ps / 1ps
// tb_gandalf_tdc: the complete 128-channel TDC at its default size, end to end.
//
// Every channel receives random pulses (most 20..100 bins wide, some 3..12 bins so
// that both edges fall into one clock period) at random instants inside the 160 ps
// bins. Triggers come every 40..70 clock periods; the window is 64 periods before
// the trigger with a width of 32 periods, so most hits fall outside every window and
// must be deleted. The S-Link port is randomly full. From the recorded edges the
// bench builds the complete expected S-Link stream (per event: control header, the
// fragments of blocks 0..15 with header, matched hits of channels 0..7 in time order
// and trailer, control trailer) and compares it word by word.
// A second phase sets a very long trigger latency, pulses channel 0 every second
// period until its hit buffer overflows and sends a burst of triggers one period
// apart until the trigger FIFOs overflow; both flags must be set.
// Each mechanism (leading and trailing edges, two edges in one period, deleted
// hits, matched hits, link-full stalls, hit buffer and trigger FIFO overflow) is
// counted and must have occurred at least once. The edge sensitivity is switched
// to leading-only, trailing-only and back during phase 1, at moments when no input
// changes.
module tb_gandalf_tdc;
  import tdc_pkg::*;
  localparam int  T = 2560, BIN = 160, R = 6, SL_HALF = 12500;
  localparam int  NB = NBLOCKS, NCH = NBLOCKS * CH_PER_BLOCK;
  localparam int  NTRIG = 12;
  localparam ts_t LAT = 20'(64 * 16), WID = 20'(32 * 16);

  logic [7:0]      clk_ph;
  logic            rst = 1'b1, slink_clk = 1'b0, slink_rst = 1'b1;
  logic [NCH-1:0]  din = '0;
  logic            trigger = 1'b0, lead_en = 1'b1, trail_en = 1'b1;
  ts_t             latency = LAT, width = WID;
  logic            slink_full = 1'b0;
  word_t           slink_data;
  logic            slink_wen, slink_ctrl;
  logic [NCH-1:0]  hit_overflow;
  logic [NB-1:0]   trig_overflow;
  logic [23:0]     n_events;

  tdc_clock_model u_clk (.clk_ph(clk_ph));
  gandalf_tdc dut (.*);

  always #(SL_HALF) slink_clk = ~slink_clk;

  hit_t        edges[NCH][$];
  ts_t         trig_t[$];
  logic [32:0] got[$];
  int          checks = 0, failures = 0;
  int          n_lead = 0, n_trail = 0, n_short = 0, n_match = 0, n_del = 0, n_stall = 0;
  bit          stop_pulses = 0, quiet = 0;
  int          n_switch = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%0t: %s", $time, what); end
  endtask

  // random pulses on every channel
  for (genvar c = 0; c < NCH; c++) begin : g_src
    initial begin
      #(R * T + 10 * T);
      while (!stop_pulses) begin
        automatic int w = ($urandom_range(0, 3) == 0) ? $urandom_range(3, 12) : $urandom_range(20, 100);
        #($urandom_range(200, 2500) * BIN);
        if (stop_pulses) break;
        wait (!quiet);
        #(20 + $urandom_range(120));
        din[c] = 1'b1;
        if (lead_en) edges[c].push_back('{lead: 1'b1, time_: 20'($time / BIN - 16 * R)});
        #(w * BIN - ($time % BIN));
        wait (!quiet);
        #(20 + $urandom_range(120));
        din[c] = 1'b0;
        if (trail_en) edges[c].push_back('{lead: 1'b0, time_: 20'($time / BIN - 16 * R)});
        if (lead_en && trail_en && w <= 12 && (edges[c][$].time_ >> 4) == (edges[c][$-1].time_ >> 4)) n_short++;
        #(BIN - ($time % BIN));
      end
    end
  end

  // S-Link capture and random link-full
  always @(posedge slink_clk) begin
    if (!slink_rst) begin
      if (slink_wen) begin
        chk(!slink_full, "write while link full");
        got.push_back({slink_ctrl, slink_data});
      end
      n_stall += slink_full;
    end
    #1 slink_full <= ($urandom_range(0, 7) == 0);
  end

  task automatic send_trigger();
    // trigger high for one period, seen at the next rising clk(0) edge
    @(posedge clk_ph[0]); #100;
    trigger = 1'b1;
    trig_t.push_back(20'(($time / T) * 16 - 16 * R));
    @(posedge clk_ph[0]); #100;
    trigger = 1'b0;
  endtask

  initial begin
    logic [32:0] exp_w[$];
    #(R * T + 100) rst = 1'b0;
    slink_rst = 1'b0;
    #(120 * T);
    // phase 1: data taking
    for (int k = 0; k < NTRIG; k++) begin
      if (k == 5 || k == 8 || k == 10) begin
        // change the edge sensitivity while no edge is in flight
        quiet = 1;
        #(10 * T);
        lead_en  = (k != 8);
        trail_en = (k != 5);
        n_switch++;
        #(T) quiet = 0;
      end
      send_trigger();
      #($urandom_range(40, 70) * T);
    end
    stop_pulses = 1;
    // wait for all events to leave the S-Link port
    for (int i = 0; i < 200000 && n_events < NTRIG; i++) @(posedge clk_ph[0]);
    repeat (50) @(posedge clk_ph[0]);
    // expected stream
    for (int k = 0; k < NTRIG; k++) begin
      automatic int  nw = 0;
      automatic ts_t ws = trig_t[k] - LAT;
      exp_w.push_back({1'b1, 8'hB0, 24'(k)});
      for (int b = 0; b < NB; b++) begin
        automatic int nd = 0;
        exp_w.push_back({1'b0, 2'b10, 4'(b), 6'(k), trig_t[k]});
        for (int c = 0; c < CH_PER_BLOCK; c++)
          foreach (edges[b*8+c][i]) begin
            automatic ts_t d = edges[b*8+c][i].time_ - ws;
            if (!d[19] && d < WID) begin
              exp_w.push_back({1'b0, 2'b00, 4'(b), 3'(c), edges[b*8+c][i].lead, 2'b00, d});
              nd++;
            end
          end
        exp_w.push_back({1'b0, 2'b11, 4'(b), 6'(k), 4'd0, 16'(nd + 2)});
        nw += nd + 2;
        n_match += nd;
      end
      exp_w.push_back({1'b1, 8'hE0, 24'(nw)});
    end
    for (int c = 0; c < NCH; c++)
      foreach (edges[c][i]) begin
        n_lead  += edges[c][i].lead;
        n_trail += !edges[c][i].lead;
      end
    n_del = n_lead + n_trail - n_match;
    chk(got.size() == exp_w.size(), $sformatf("%0d words received, %0d expected", got.size(), exp_w.size()));
    foreach (exp_w[i]) begin
      automatic logic [32:0] g = (i < got.size()) ? got[i] : '0;
      chk(g === exp_w[i], $sformatf("word %0d: got %h expected %h", i, g, exp_w[i]));
    end
    chk(hit_overflow == '0 && trig_overflow == '0, "overflow during normal running");
    $display("events=%0d leading=%0d trailing=%0d short=%0d matched=%0d deleted=%0d stalls=%0d",
             n_events, n_lead, n_trail, n_short, n_match, n_del, n_stall);

    // phase 2: overflow of a hit buffer and of the trigger FIFOs
    latency = 20'(20000 * 16);
    width   = 20'd16;
    repeat (20) @(posedge clk_ph[0]);
    for (int i = 0; i < 560; i++) begin
      // two pulses of 5 bins each in two periods: two hits per period on average
      @(posedge clk_ph[0]); #500; din[0] = 1'b1; #800; din[0] = 1'b0;
      @(posedge clk_ph[0]); #300; din[0] = 1'b1; #800; din[0] = 1'b0;
      #640; din[0] = 1'b1; #800; din[0] = 1'b0;
    end
    repeat (10) @(posedge clk_ph[0]);
    chk(hit_overflow[0] == 1'b1, "hit buffer overflow not flagged");
    @(posedge clk_ph[0]); #100;
    trigger = 1'b1;
    repeat (100) @(posedge clk_ph[0]);
    #100 trigger = 1'b0;
    repeat (5) @(posedge clk_ph[0]);
    chk(trig_overflow == '1, "trigger FIFO overflow not flagged");

    if (n_lead == 0)  begin failures++; $display("no leading edges"); end
    if (n_trail == 0) begin failures++; $display("no trailing edges"); end
    if (n_short == 0) begin failures++; $display("no two-edge periods"); end
    if (n_match == 0) begin failures++; $display("no matched hits"); end
    if (n_del == 0)   begin failures++; $display("no deleted hits"); end
    if (n_switch == 0) begin failures++; $display("no edge-mode switch"); end
    if (n_stall == 0) begin failures++; $display("no link-full stalls"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd400000 * T);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
