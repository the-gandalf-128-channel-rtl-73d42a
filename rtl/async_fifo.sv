// async_fifo: dual-clock FIFO, the S-Link FIFO of an F1-block.
//
// Carries the F1-block's data words from the TDC system clock clk(0) to the clock of
// the S-Link output. Binary pointers count in each domain; their Gray-coded copies
// cross to the other domain through two flip-flops, so that a pointer seen in the
// wrong domain is at worst one step old. full is computed in the write domain, empty
// in the read domain, both conservatively. First-word fall-through on the read side
// (dout valid while !empty, pop removes). Each side has its own reset.
// Timing: a written word becomes visible to the reader two or three rclk edges later.
// The FIFO is named in the published design; treating it as the clock-domain
// crossing, and its depth, are this design's own choices.
module async_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 256
) (
  input  logic         wclk,
  input  logic         wrst,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         full,
  input  logic         rclk,
  input  logic         rrst,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty
);

  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, rbin, wgray, rgray;
  logic [AW:0]  rgray_w1, rgray_w2;   // read pointer in the write domain
  logic [AW:0]  wgray_r1, wgray_r2;   // write pointer in the read domain
  logic [AW:0]  wbin_nx, rbin_nx;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign wbin_nx = wbin + (AW+1)'(push && !full);
  assign rbin_nx = rbin + (AW+1)'(pop && !empty);

  // full: write Gray pointer equals read Gray pointer with the two top bits inverted
  assign full  = wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]};
  assign empty = rgray == wgray_r2;
  assign dout  = mem[rbin[AW-1:0]];

  always_ff @(posedge wclk) begin
    if (push && !full) mem[wbin[AW-1:0]] <= din;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

endmodule
