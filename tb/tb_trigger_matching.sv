`timescale 1ps / 1ps
// tb_trigger_matching: the unit under test reads eight modelled hit buffers
// (queues) and a modelled trigger FIFO, with the output FIFO randomly full.
// Dense random hits (both edge types) are preloaded; triggers enter the trigger FIFO
// when the clock counter reaches their time. For each trigger the output must be a
// header (block, event number, trigger time), the hits of the window
// [t - latency, t - latency + width) channel by channel in time order with times
// relative to the window start, and a trailer with the word count. The header must
// not appear before the window end is 8 periods old. The bench also counts hits
// deleted while idle and hits deleted during a scan; both must occur.
module tb_trigger_matching;
  import tdc_pkg::*;
  localparam int CH = 8, NTRIG = 40;
  localparam logic [3:0] BID = 4'd5;

  logic                clk = 1'b0, rst = 1'b1;
  logic [COARSE_W-1:0] now;
  ts_t                 latency, width;
  logic                trig_empty, trig_pop;
  ts_t                 trig_time;
  logic [CH-1:0]       hb_valid, hb_pop;
  hit_t [CH-1:0]       hb_data;
  logic                out_full, out_push;
  word_t               out_data;
  logic [15:0]         n_events;

  hit_t   hq[CH][$];
  ts_t    tq[$];
  ts_t    trig_list[NTRIG];
  word_t  exp_w[$];
  int     checks = 0, failures = 0, n_idle_del = 0, n_scan_del = 0, n_match = 0, n_stall = 0;

  trigger_matching #(.CH(CH), .BLOCK_ID(BID)) dut (.*);

  always #1280 clk = ~clk;

  // model outputs, refreshed after every change of the queues
  task automatic refresh();
    trig_empty = (tq.size() == 0);
    trig_time  = trig_empty ? '0 : tq[0];
    for (int c = 0; c < CH; c++) begin
      hb_valid[c] = (hq[c].size() != 0);
      hb_data[c]  = hb_valid[c] ? hq[c][0] : '0;
    end
  endtask

  always @(negedge clk) refresh();

  always @(posedge clk) begin
    if (!rst) begin
      for (int c = 0; c < CH; c++)
        if (hb_pop[c]) begin
          if (!hb_valid[c]) begin failures++; $display("pop of empty buffer"); end
          else begin
            if (trig_empty) n_idle_del++;
            else if (!out_push || out_data[31:30] != 2'b00) n_scan_del++;
            void'(hq[c].pop_front());
          end
        end
      if (trig_pop) void'(tq.pop_front());
      if (out_full) n_stall++;
      if (out_push) begin
        checks++;
        if (out_full) begin failures++; $display("push while full"); end
        if (exp_w.size() == 0 || out_data !== exp_w[0]) begin
          failures++;
          if (failures < 4) $display("t=%0t now=%0d word %h expected %h left %0d", $time, now, out_data, exp_w.size() ? exp_w[0] : 0, exp_w.size());
        end
        if (out_data[31:30] == 2'b10) begin
          automatic ts_t age = {now, 4'd0} - (out_data[19:0] - latency + width);
          checks++;
          if (age[19] || age < 20'd128) begin failures++; $display("header too early"); end
        end
        if (out_data[31:30] == 2'b00) n_match++;
        if (exp_w.size()) void'(exp_w.pop_front());
      end
      #1 refresh();
    end
  end

  always @(posedge clk) begin
    if (rst) now <= '0;
    else     now <= now + 1'b1;
  end

  initial begin
    ts_t t;
    latency  = 20'd1600;   // 100 periods
    width    = 20'd800;    //  50 periods
    out_full = 1'b0;
    // hits: every channel, increasing times, mean gap about 100 bins
    for (int c = 0; c < CH; c++) begin
      t = 20'($urandom_range(0, 200));
      while (t < 20'd16 * 20'(300 * NTRIG + 400)) begin
        hq[c].push_back('{lead: 1'($urandom), time_: t});
        t += 20'($urandom_range(5, 200));
      end
    end
    // triggers every 300 periods, first at period 400 (non-overlapping windows)
    for (int k = 0; k < NTRIG; k++) trig_list[k] = 20'(16 * (400 + 300 * k + $urandom_range(0, 50)));
    // expected words
    for (int k = 0; k < NTRIG; k++) begin
      automatic ts_t ws = trig_list[k] - latency;
      automatic int  n  = 1;
      exp_w.push_back({2'b10, BID, 6'(k), trig_list[k]});
      for (int c = 0; c < CH; c++)
        foreach (hq[c][i]) begin
          automatic ts_t d = hq[c][i].time_ - ws;
          if (!d[19] && d < width) begin
            exp_w.push_back({2'b00, BID, 3'(c), hq[c][i].lead, 2'b00, d});
            n++;
          end
        end
      exp_w.push_back({2'b11, BID, 6'(k), 4'd0, 16'(n + 1)});
    end
    refresh();
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int k = 0; k < NTRIG; k++) begin
      while ({now, 4'd0} != trig_list[k]) begin
        out_full = ($urandom_range(0, 4) == 0);
        @(negedge clk);
      end
      tq.push_back(trig_list[k]);
      refresh();
      @(negedge clk);
    end
    repeat (1000) begin out_full = ($urandom_range(0, 4) == 0); @(negedge clk); end
    checks++;
    if (exp_w.size() != 0 || n_events != NTRIG) begin failures++; $display("%0d words missing, %0d events", exp_w.size(), n_events); end
    if (n_idle_del == 0 || n_scan_del == 0 || n_stall == 0) failures++;
    $display("matched=%0d idle deletions=%0d scan deletions=%0d", n_match, n_idle_del, n_scan_del);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd20000 * 2560);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
