`timescale 1ps / 1ps
// tb_tdc_channel: one channel from input pin to hit buffer output.
// Random pulses (3 to 60 bins wide, so some have both edges in one clock period)
// are applied at random instants inside the 160 ps bins. Every edge must come out of
// the hit buffer, in order, with time floor(t / 160 ps) - 16*R, where R is the last
// clk(0) edge that saw reset, and with the right edge type, at most 6 clock periods
// after it happened. Phase 1 enables both edges, phase 2 only leading edges,
// phase 3 only trailing edges.
module tb_tdc_channel;
  import tdc_pkg::*;
  localparam int T = 2560, BIN = 160, R = 5;

  logic [7:0] clk_ph;
  logic       din = 1'b0, rst = 1'b1, lead_en = 1'b1, trail_en = 1'b1;
  hit_t       rd_data;
  logic       rd_valid, rd_pop, overflow;
  int         checks = 0, failures = 0;
  hit_t       exp_q[$];
  longint     exp_t[$];
  int         n_lead = 0, n_trail = 0, n_short = 0;
  bit         done = 0;

  tdc_clock_model u_clk (.clk_ph(clk_ph));
  tdc_channel dut (.din(din), .clk_ph(clk_ph), .rst(rst), .lead_en(lead_en), .trail_en(trail_en),
                   .rd_data(rd_data), .rd_valid(rd_valid), .rd_pop(rd_pop), .overflow(overflow));

  task automatic edge_at(input logic v);
    din = v;
    if ((v && lead_en) || (!v && trail_en)) begin
      exp_q.push_back('{lead: v, time_: 20'($time / BIN - 16 * R)});
      exp_t.push_back($time);
    end
  endtask

  task automatic pulses(input int n);
    for (int i = 0; i < n; i++) begin
      automatic int w = ($urandom_range(0, 3) == 0) ? $urandom_range(3, 12) : $urandom_range(13, 60);
      #(($urandom_range(17, 50)) * BIN);
      #(20 + $urandom_range(120));
      edge_at(1'b1);
      if (w <= 12) n_short++;
      #(w * BIN - ($time % BIN) + 20 + $urandom_range(120));
      edge_at(1'b0);
      #(BIN - ($time % BIN));
    end
  endtask

  // reader: pops every hit and compares it with the expected list
  assign rd_pop = rd_valid;
  always @(posedge clk_ph[0]) begin
    if (rd_valid && !rst) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected hit %h", rd_data);
      end else begin
        if (rd_data !== exp_q[0]) begin
          failures++;
          if (failures < 10) $display("hit %h expected %h", rd_data, exp_q[0]);
        end
        if ($time - exp_t[0] > 6 * T) begin
          failures++; $display("hit late: %0d ps", $time - exp_t[0]);
        end
        n_lead  += rd_data.lead;
        n_trail += !rd_data.lead;
        void'(exp_q.pop_front());
        void'(exp_t.pop_front());
      end
    end
  end

  initial begin
    #(R * T + 100) rst = 1'b0;
    #(4 * T);
    pulses(200);
    #(10 * T) lead_en = 1'b1; trail_en = 1'b0;
    pulses(50);
    #(10 * T) lead_en = 1'b0; trail_en = 1'b1;
    pulses(50);
    #(10 * T);
    checks++;
    if (exp_q.size() != 0 || overflow) begin failures++; $display("%0d hits missing", exp_q.size()); end
    if (n_short == 0 || n_lead == 0 || n_trail == 0) failures++;
    $display("leading=%0d trailing=%0d short pulses=%0d", n_lead, n_trail, n_short);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(100000 * T);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
