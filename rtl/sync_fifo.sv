// sync_fifo: single-clock first-in first-out buffer.
//
// Used as the trigger FIFO (trigger timestamps waiting for the trigger matching
// unit) and as the output FIFO of an F1-block (matched data words). A circular RAM
// of DEPTH words with read and write pointers one bit wider than the address, so
// full and empty are told apart. First-word fall-through: dout shows the oldest word
// whenever !empty, pop removes it. A push while full is ignored and a pop while empty
// is ignored; the assertions flag both. count gives the fill level.
// Timing: a word pushed at one edge is visible on dout after that edge.
// The FIFOs are named in the published design; depth, width and interface are this
// design's own choices.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     push,
  input  logic [W-1:0]             din,
  output logic                     full,
  input  logic                     pop,
  output logic [W-1:0]             dout,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, rptr;

  assign count = wptr - rptr;
  assign full  = count == (AW+1)'(DEPTH);
  assign empty = wptr == rptr;
  assign dout  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wptr[AW-1:0]] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push && !full) wptr <= wptr + 1'b1;
      if (pop && !empty) rptr <= rptr + 1'b1;
    end
  end

  no_overrun:  assert property (@(posedge clk) disable iff (rst) push |-> !full);
  no_underrun: assert property (@(posedge clk) disable iff (rst) pop  |-> !empty);

endmodule
