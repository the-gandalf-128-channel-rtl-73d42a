`timescale 1ps / 1ps
// tb_tdc_measurements: the two characterisation measurements of the TDC, repeated
// in simulation on two channels with ideal clocks.
//
// Code density: channel 0 gets 4000 pulses at instants spread uniformly over the
// clock period (1 ps steps). Both edges are histogrammed by bin (time mod 16). With
// ideal clock phases every bin must receive 1/16 of the hits; the bench requires
// |DNL| = |count / mean - 1| < 0.25 for every bin (about 5.5 standard deviations of
// the counting statistics).
// Delay measurement: channel 1 gets the same pulses delayed by 1000 ps = 6.25 bins.
// The difference of the two time stamps must average 6.25 bins and its RMS must be
// the pure quantisation value sqrt(0.25 * 0.75) = 0.433 bins, below the 0.56 bin
// limit quoted for the hardware.
module tb_tdc_measurements;
  import tdc_pkg::*;
  localparam int T = 2560, BIN = 160, R = 4, NP = 4000, DELAY = 1000;

  logic [7:0] clk_ph;
  logic [1:0] din = '0, rd_valid, overflow;
  logic       rst = 1'b1;
  hit_t       rd_data[2];
  int         checks = 0, failures = 0;
  int         hist[16];
  ts_t        t0[$], t1[$];

  tdc_clock_model u_clk (.clk_ph(clk_ph));

  for (genvar c = 0; c < 2; c++) begin : g_ch
    tdc_channel u_ch (.din(din[c]), .clk_ph(clk_ph), .rst(rst), .lead_en(1'b1), .trail_en(1'b1),
                      .rd_data(rd_data[c]), .rd_valid(rd_valid[c]), .rd_pop(rd_valid[c]),
                      .overflow(overflow[c]));
  end

  always @(posedge clk_ph[0]) begin
    if (!rst && rd_valid[0]) begin t0.push_back(rd_data[0].time_); hist[rd_data[0].time_[3:0]]++; end
    if (!rst && rd_valid[1]) t1.push_back(rd_data[1].time_);
  end

  initial begin
    real mean, rms, sum, sum2, dnl, worst;
    foreach (hist[i]) hist[i] = 0;
    #(R * T + 100) rst = 1'b0;
    #(5 * T);
    fork
      for (int n = 0; n < NP; n++) begin
        #($urandom_range(T, 20 * T));
        // no edge exactly on a sampling instant
        if ($time % 64'(BIN) == 0) #1;
        din[0] = 1'b1;
        #(30 * BIN + $urandom_range(1, BIN - 2));
        if ($time % 64'(BIN) == 0) #1;
        din[0] = 1'b0;
      end
      forever begin
        @(din[0]);
        din[1] <= #(DELAY) din[0];
      end
    join_any
    #(20 * T);
    // code density
    worst = 0.0;
    for (int b = 0; b < 16; b++) begin
      dnl = real'(hist[b]) / (real'(t0.size()) / 16.0) - 1.0;
      if (dnl < 0) dnl = -dnl;
      if (dnl > worst) worst = dnl;
      checks++;
      if (dnl >= 0.25) begin failures++; $display("bin %0d: %0d hits, |DNL| %f", b, hist[b], dnl); end
    end
    // delay between the channels
    checks++;
    if (t0.size() != 2 * NP || t1.size() != 2 * NP || overflow != 0) begin
      failures++; $display("hits: %0d and %0d of %0d", t0.size(), t1.size(), 2 * NP);
    end
    sum = 0.0; sum2 = 0.0;
    foreach (t0[i]) begin
      automatic ts_t d = t1[i] - t0[i];
      sum  += real'(d);
      sum2 += real'(d) * real'(d);
    end
    mean = sum / real'(t0.size());
    rms  = $sqrt(sum2 / real'(t0.size()) - mean * mean);
    $display("code density: worst |DNL| %f; delay %f bins, RMS %f bins", worst, mean, rms);
    checks += 2;
    if (mean < 6.20 || mean > 6.30) begin failures++; $display("mean delay %f, expected 6.25", mean); end
    if (rms < 0.40 || rms > 0.47 || rms >= 0.56) begin failures++; $display("RMS %f, expected 0.433", rms); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd200000 * T);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
