`timescale 1ps / 1ps
// tb_hit_buffer: phase 1 writes zero, one or two hits per clock at random while the
// reader pops at random, and compares every hit read with a queue model (order and
// content), checking that a hit written into an empty buffer is readable after the
// next clock edge. Phase 2 stops reading and writes DEPTH+10 hits: the overflow flag must rise
// and exactly DEPTH+QN (RAM plus input queue) hits, the oldest ones, must be readable.
module tb_hit_buffer;
  import tdc_pkg::*;
  localparam int DEPTH = 1024, QN = 3;

  logic clk = 1'b0, rst = 1'b1;
  hit_t wr_a, wr_b, rd_data;
  logic wr_a_v, wr_b_v, rd_valid, rd_pop, overflow;
  int   checks = 0, failures = 0;
  hit_t model[$];
  int   n_two = 0;

  hit_buffer dut (.*);

  always #1280 clk = ~clk;

  function automatic hit_t rnd_hit();
    return '{lead: 1'($urandom), time_: 20'($urandom)};
  endfunction

  initial begin
    wr_a_v = 0; wr_b_v = 0; rd_pop = 0; wr_a = '0; wr_b = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // latency: one hit into the empty buffer
    wr_a = rnd_hit(); wr_a_v = 1;
    @(negedge clk); wr_a_v = 0;
    checks++;
    if (!rd_valid || rd_data !== wr_a) begin failures++; $display("not visible after one clock"); end
    rd_pop = 1; @(negedge clk); rd_pop = 0;
    // phase 1
    for (int i = 0; i < 4000; i++) begin
      automatic int r = $urandom_range(0, 9);
      wr_a_v = (r < 5); wr_b_v = (r == 0) && (i % 7 == 0);
      wr_a = rnd_hit(); wr_b = rnd_hit();
      if (wr_a_v) model.push_back(wr_a);
      if (wr_a_v && wr_b_v) begin model.push_back(wr_b); n_two++; end
      else wr_b_v = 0;
      rd_pop = rd_valid && ($urandom_range(0, 9) < 6);
      if (rd_pop) begin
        checks++;
        if (model.size() == 0 || rd_data !== model[0]) begin
          failures++;
          if (failures < 10) $display("read %h expected %h", rd_data, model.size() ? model[0] : '0);
        end
        if (model.size()) void'(model.pop_front());
      end
      @(negedge clk);
    end
    wr_a_v = 0; wr_b_v = 0; rd_pop = 0;
    repeat (10) @(negedge clk);
    while (rd_valid) begin
      rd_pop = 1; checks++;
      if (model.size() == 0 || rd_data !== model[0]) failures++;
      if (model.size()) void'(model.pop_front());
      @(negedge clk);
    end
    rd_pop = 0;
    checks++;
    if (model.size() != 0 || overflow) begin failures++; $display("left %0d, overflow %b", model.size(), overflow); end
    // phase 2: overflow
    for (int i = 0; i < DEPTH + 10; i++) begin
      wr_a = rnd_hit(); wr_a_v = 1; model.push_back(wr_a);
      @(negedge clk);
    end
    wr_a_v = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (!overflow) begin failures++; $display("no overflow flag"); end
    for (int i = 0; i < DEPTH + QN; i++) begin
      checks++;
      if (!rd_valid || rd_data !== model[i]) begin
        failures++;
        if (failures < 10) $display("overflow read %0d: valid %b %h exp %h", i, rd_valid, rd_data, model[i]);
      end
      rd_pop = rd_valid;
      @(negedge clk);
      rd_pop = 0;
    end
    checks++;
    if (rd_valid) begin failures++; $display("more than DEPTH+QN hits kept"); end
    if (n_two == 0) failures++;
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
