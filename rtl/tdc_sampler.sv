// tdc_sampler: the TDC register of one channel (16 sampling flip-flops).
//
// Shifted clock sampling: the data input is routed to 16 flip-flops. Flip-flop i
// (i = 0..7) is clocked by the rising edge of clk(i), flip-flop 8+i by the falling
// edge of clk(i), which in the FPGA is the locally inverted clock. With clk(i)
// delayed by i/16 of a period, q[k] holds the input as it was at phase k/16 of the
// clock period, so the 16 bits form a snapshot with 1/16-period resolution. The
// bit order follows sampling time, which is what the partitions and the hit search
// rely on.
//
// Interface: din (asynchronous input), clk_ph[7:0] (phase-shifted clocks),
// q[15:0] (each bit in its own clock domain). No reset: the flip-flops only follow
// the input. Follows the published design; the flip-flop placement that makes the
// routing skew uniform is a floorplanning matter outside RTL.
module tdc_sampler
  import tdc_pkg::*;
(
  input  logic                din,
  input  logic [NPHASE-1:0]   clk_ph,
  output logic [NBINS-1:0]    q
);

  // one flip-flop per generate scope, each in its own clock domain
  for (genvar i = 0; i < NPHASE; i++) begin : g_ff
    logic ff_rise, ff_fall;
    always_ff @(posedge clk_ph[i]) ff_rise <= din;
    always_ff @(negedge clk_ph[i]) ff_fall <= din;
    assign q[i]          = ff_rise;
    assign q[NPHASE + i] = ff_fall;
  end

endmodule
