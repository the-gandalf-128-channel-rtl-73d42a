// clock_counter: coarse time base of a TDC channel.
//
// Counts periods of the system clock clk(0); together with the bitswap position it
// gives the hit time. Synchronous reset to zero, wraps around after 2**W periods
// (2**16 periods = 169 us at 388.8 MHz); all later time comparisons are done modulo
// 2**W. The counter itself is part of the published design, its width and reset
// are this design's own choice.
module clock_counter #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst,
  output logic [W-1:0] count
);

  always_ff @(posedge clk) begin
    if (rst) count <= '0;
    else     count <= count + 1'b1;
  end

endmodule
