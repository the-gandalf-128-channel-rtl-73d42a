// tb_tdc_sampler: checks that flip-flop k of the TDC register holds the input as it
// was at its most recent sampling instant k/16 of a period (rising clk(i) for k < 8,
// falling clk(k-8) otherwise). The input toggles at random times away from the clock
// edges; the register is checked at random instants against a reference computed
// from the recorded input changes.
`timescale 1ps / 1ps
module tb_tdc_sampler;
  localparam int T = 2560, BIN = 160;

  logic [7:0]  clk_ph;
  logic        din;
  logic [15:0] q;
  int          checks = 0, failures = 0;
  longint      chg_t[$];
  logic        chg_v[$];

  tdc_clock_model u_clk (.clk_ph(clk_ph));
  tdc_sampler     dut   (.din(din), .clk_ph(clk_ph), .q(q));

  function automatic logic din_at(longint t);
    logic v = 1'b0;
    foreach (chg_t[i]) if (chg_t[i] <= t) v = chg_v[i];
    return v;
  endfunction

  task automatic check_now();
    longint now = $time;
    for (int k = 0; k < 16; k++) begin
      longint s = ((now - k * BIN) / T) * T + k * BIN;   // last sample of ff k
      logic   e = din_at(s);
      if (s < 0) continue;
      checks++;
      if (q[k] !== e) begin
        failures++;
        if (failures < 10) $display("t=%0t q[%0d]=%b expected %b", $time, k, q[k], e);
      end
    end
  endtask

  initial begin
    din = 1'b0;
    chg_t.push_back(0); chg_v.push_back(1'b0);
    #(3 * T + 57);
    for (int n = 0; n < 300; n++) begin
      int unsigned wait_bins = 1 + $urandom_range(40);
      // move to a random place inside a bin, away from the edges
      #(wait_bins * BIN);
      #(20 + $urandom_range(110));
      din = ~din;
      chg_t.push_back($time); chg_v.push_back(din);
      #(10 + $urandom_range(30));
      // sample instants land at multiples of BIN; check between them
      #(BIN - ($time % BIN) + 40);
      check_now();
      #($urandom_range(3) * BIN);
      check_now();
      #(BIN - ($time % BIN) + 20);   // realign so the next toggle is away from edges
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2000 * T);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
