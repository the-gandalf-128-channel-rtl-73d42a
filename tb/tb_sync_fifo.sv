`timescale 1ps / 1ps
// tb_sync_fifo: random pushes and pops against a queue model, for a small FIFO
// (16 words, so that full is reached often) and the 512-word output FIFO size;
// checks data order, full, empty and the fill count. Pushes while full and pops
// while empty are not issued (the FIFO asserts on them).
module tb_sync_fifo;
  logic clk = 1'b0, rst = 1'b1;
  int   checks = 0, failures = 0, n_full = 0;

  logic        push_s, pop_s, full_s, empty_s;
  logic [31:0] din_s, dout_s;
  logic [4:0]  cnt_s;
  logic        push_l, pop_l, full_l, empty_l;
  logic [31:0] din_l, dout_l;
  logic [9:0]  cnt_l;
  logic [31:0] ms[$], ml[$];

  sync_fifo #(.W(32), .DEPTH(16)) dut_s (.clk(clk), .rst(rst), .push(push_s), .din(din_s), .full(full_s),
    .pop(pop_s), .dout(dout_s), .empty(empty_s), .count(cnt_s));
  sync_fifo dut_l (.clk(clk), .rst(rst), .push(push_l), .din(din_l), .full(full_l),
    .pop(pop_l), .dout(dout_l), .empty(empty_l), .count(cnt_l));

  always #1280 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%0t %s", $time, what); end
  endtask

  initial begin
    push_s = 0; pop_s = 0; push_l = 0; pop_l = 0; din_s = 0; din_l = 0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 6000; i++) begin
      // bias phases towards filling or draining
      automatic int bias = ((i / 700) % 2) ? 7 : 3;
      chk(cnt_s == 5'(ms.size()), "small count");
      chk(full_s == (ms.size() == 16), "small full");
      chk(empty_s == (ms.size() == 0), "small empty");
      if (ms.size()) chk(dout_s == ms[0], "small data");
      chk(cnt_l == 10'(ml.size()), "large count");
      chk(empty_l == (ml.size() == 0), "large empty");
      chk(full_l == (ml.size() == 512), "large full");
      if (ml.size()) chk(dout_l == ml[0], "large data");
      n_full += full_s;
      push_s = !full_s && ($urandom_range(0, 9) < bias);
      pop_s  = !empty_s && ($urandom_range(0, 9) < 10 - bias);
      din_s  = $urandom;
      push_l = !full_l && ($urandom_range(0, 9) < bias);
      pop_l  = !empty_l && ($urandom_range(0, 9) < 10 - bias);
      din_l  = $urandom;
      @(posedge clk);
      if (pop_s) void'(ms.pop_front());
      if (push_s) ms.push_back(din_s);
      if (pop_l) void'(ml.pop_front());
      if (push_l) ml.push_back(din_l);
      @(negedge clk);
    end
    if (n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(20000 * 2560);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
