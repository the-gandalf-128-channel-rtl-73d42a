// tb_partition_sync: checks the two-stage merge into the clk(0) domain.
// A random input waveform is sampled by the TDC register; after every rising clk(0)
// edge m the four partition words must hold the samples of clock period m-2: bit j of
// partition p is the input at time (m-2)*T + (4p+j)*T/16 (bit 4 of partition 3 being
// the first sample of the following period). The reference is computed from the
// recorded input changes, so it also checks the two-period latency.
`timescale 1ps / 1ps
module tb_partition_sync;
  import tdc_pkg::*;
  localparam int T = 2560, BIN = 160;

  logic [7:0]             clk_ph;
  logic                   din;
  logic [15:0]            q;
  logic [3:0][4:0]        part;
  int                     checks = 0, failures = 0;
  longint                 chg_t[$];
  logic                   chg_v[$];

  tdc_clock_model u_clk  (.clk_ph(clk_ph));
  tdc_sampler     u_samp (.din(din), .clk_ph(clk_ph), .q(q));
  partition_sync  dut    (.clk_ph(clk_ph), .q(q), .part(part));

  function automatic logic din_at(longint t);
    logic v = 1'b0;
    foreach (chg_t[i]) if (chg_t[i] <= t) v = chg_v[i];
    return v;
  endfunction

  // input: random toggles, placed 20..140 ps into a bin
  initial begin
    din = 1'b0;
    chg_t.push_back(0); chg_v.push_back(1'b0);
    forever begin
      #($urandom_range(1, 30) * BIN);
      #(20 + $urandom_range(120));
      din = ~din;
      chg_t.push_back($time); chg_v.push_back(din);
      #(BIN - ($time % BIN));
    end
  end

  initial begin
    for (int m = 1; m <= 400; m++) begin
      @(posedge clk_ph[0]);
      #50;
      if (m >= 4) begin
        for (int p = 0; p < 4; p++)
          for (int j = 0; j < 5; j++) begin
            automatic longint e = ($time - 50) / T;
            automatic longint s = (e - 2) * T + (4 * p + j) * BIN;
            checks++;
            if (part[p][j] !== din_at(s)) begin
              failures++;
              if (failures < 10) $display("edge %0d part[%0d][%0d]=%b exp %b", m, p, j, part[p][j], din_at(s));
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(1000 * T);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
