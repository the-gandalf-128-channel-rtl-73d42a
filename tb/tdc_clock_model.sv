// tdc_clock_model: behavioural model of the clock management that feeds the TDC.
//
// Produces the eight TDC clocks clk(0..7) of one period PERIOD_PS, clk(i) delayed
// by i/16 of the period, so that their rising and falling edges together mark 16
// equidistant sampling points. In the FPGA two PLLs generate these clocks; here they
// are free-running from time 0, with clk(0) rising at t = 0, PERIOD_PS, ...
// The default period of 2560 ps (390.6 MHz) gives exact 160 ps bins; the measured
// design runs at 388.8 MHz (2572 ps). Time unit: 1 ps.
`timescale 1ps / 1ps
module tdc_clock_model #(
  parameter int PERIOD_PS = 2560
) (
  output logic [7:0] clk_ph
);

  localparam int BIN  = PERIOD_PS / 16;
  localparam int HALF = PERIOD_PS / 2;

  for (genvar i = 0; i < 8; i++) begin : g_clk
    initial begin
      clk_ph[i] = 1'b0;
      #(i * BIN);
      forever begin
        clk_ph[i] = 1'b1;
        #(HALF);
        clk_ph[i] = 1'b0;
        #(HALF);
      end
    end
  end

endmodule
