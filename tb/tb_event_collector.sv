`timescale 1ps / 1ps
// tb_event_collector: sixteen modelled S-Link FIFOs receive event fragments
// (header, 0..6 data words, trailer) for 60 events at random times and in random
// block order; the link is randomly full. The S-Link stream must be, per event, a
// control header with the event number, the fragments of blocks 0..15 in that order,
// and a control trailer with the number of words copied. Writes while the link is
// full are counted as failures.
module tb_event_collector;
  import tdc_pkg::*;
  localparam int NB = 16, NEV = 60;

  logic              clk = 1'b0, rst = 1'b1;
  logic [NB-1:0]     f_empty, f_pop;
  word_t [NB-1:0]    f_dout;
  logic              slink_full;
  word_t             slink_data;
  logic              slink_wen, slink_ctrl;
  logic [23:0]       n_events;

  word_t             fq[NB][$];
  logic [32:0]       exp_w[$];      // {ctrl, data}
  int                checks = 0, failures = 0, n_stall = 0;

  event_collector #(.NBLK(NB)) dut (.*);

  always #3125 clk = ~clk;

  task automatic refresh();
    for (int b = 0; b < NB; b++) begin
      f_empty[b] = (fq[b].size() == 0);
      f_dout[b]  = f_empty[b] ? '0 : fq[b][0];
    end
  endtask

  always @(posedge clk) begin
    if (!rst) begin
      for (int b = 0; b < NB; b++)
        if (f_pop[b]) begin
          if (fq[b].size() == 0) begin failures++; $display("pop of empty FIFO %0d", b); end
          else void'(fq[b].pop_front());
        end
      if (slink_full) n_stall++;
      if (slink_wen) begin
        checks++;
        if (slink_full) begin failures++; $display("write while link full"); end
        if (exp_w.size() == 0 || {slink_ctrl, slink_data} !== exp_w[0]) begin
          failures++;
          if (failures < 10) $display("got %b %h expected %h", slink_ctrl, slink_data, exp_w.size() ? exp_w[0] : 0);
        end
        if (exp_w.size()) void'(exp_w.pop_front());
      end
      #1 refresh();
    end
  end

  initial begin
    word_t frag[NB][NEV][$];
    int    next[NB];
    refresh();
    slink_full = 1'b0;
    for (int e = 0; e < NEV; e++) begin
      automatic int nw = 0;
      exp_w.push_back({1'b1, 8'hB0, 24'(e)});
      for (int b = 0; b < NB; b++) begin
        automatic int nd = $urandom_range(0, 6);
        frag[b][e].push_back({2'b10, 4'(b), 6'(e), 20'($urandom)});
        for (int i = 0; i < nd; i++) frag[b][e].push_back({2'b00, 4'(b), 26'($urandom)});
        frag[b][e].push_back({2'b11, 4'(b), 6'(e), 4'd0, 16'(nd + 2)});
        foreach (frag[b][e][i]) exp_w.push_back({1'b0, frag[b][e][i]});
        nw += nd + 2;
      end
      exp_w.push_back({1'b1, 8'hE0, 24'(nw)});
    end
    for (int b = 0; b < NB; b++) next[b] = 0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // deliver one fragment at a time to a random block that still has events left
    for (int n = 0; n < NB * NEV; n++) begin
      automatic int b;
      do b = $urandom_range(0, NB - 1); while (next[b] >= NEV);
      foreach (frag[b][next[b]][i]) fq[b].push_back(frag[b][next[b]][i]);
      next[b]++;
      refresh();
      slink_full = ($urandom_range(0, 5) == 0);
      @(negedge clk);
    end
    repeat (8000) begin slink_full = ($urandom_range(0, 5) == 0); @(negedge clk); end
    checks++;
    if (exp_w.size() != 0 || n_events != NEV) begin failures++; $display("%0d words missing", exp_w.size()); end
    if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd20000 * 6250);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
