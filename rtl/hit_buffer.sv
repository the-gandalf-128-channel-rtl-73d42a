// hit_buffer: per-channel 1k-deep buffer of hit timestamps.
//
// Hits from the hit search (up to two per clock period, already ordered in time)
// first enter a queue of QN entries; every clock period the oldest queued hit moves
// into a circular RAM of DEPTH entries. The trigger matching unit reads the oldest
// stored hit on rd_data (first-word fall-through, rd_valid = not empty) and removes
// it with rd_pop, either because it falls into a trigger window or because it has
// become too old for any trigger. When both the RAM and the queue are full, new hits
// are dropped and the sticky overflow flag is set until reset.
//
// Timing: a hit presented at a clock edge goes straight into the RAM when the queue
// is empty and the RAM not full, and is visible on rd_data right after that edge. rd_data is read asynchronously from
// the RAM array; in the FPGA this would be a block RAM with an output register.
// The 1k depth follows the published design; the queue, the drop-on-full policy and
// the overflow flag are this design's own choices.
module hit_buffer
  import tdc_pkg::*;
#(
  parameter int DEPTH = HITBUF_DEPTH,
  parameter int QN    = 3
) (
  input  logic clk,
  input  logic rst,
  input  hit_t wr_a,
  input  logic wr_a_v,
  input  hit_t wr_b,
  input  logic wr_b_v,
  output hit_t rd_data,
  output logic rd_valid,
  input  logic rd_pop,
  output logic overflow
);

  localparam int AW = $clog2(DEPTH);

  hit_t           mem [DEPTH];
  logic [AW:0]    wptr, rptr;
  hit_t           q    [QN];
  logic [2:0]     qn;

  logic           full, empty;
  hit_t           lst  [QN + 2];
  logic [2:0]     ln;
  logic           ram_we;
  hit_t           ram_wd;
  hit_t           q_nx [QN];
  logic [2:0]     qn_nx;
  logic           drop;

  assign full     = (wptr[AW] != rptr[AW]) && (wptr[AW-1:0] == rptr[AW-1:0]);
  assign empty    = (wptr == rptr);
  assign rd_valid = !empty;
  assign rd_data  = mem[rptr[AW-1:0]];

  // queue contents followed by the new hits, oldest first
  always_comb begin
    for (int i = 0; i < QN + 2; i++) lst[i] = '0;
    for (int i = 0; i < QN; i++) if (3'(i) < qn) lst[i] = q[i];
    ln = qn;
    if (wr_a_v) begin lst[ln] = wr_a; ln = ln + 3'd1; end
    if (wr_b_v) begin lst[ln] = wr_b; ln = ln + 3'd1; end
    ram_we = (ln != 0) && !full;
    ram_wd = lst[0];
    for (int i = 0; i < QN; i++) q_nx[i] = ram_we ? lst[i+1] : lst[i];
    qn_nx = ram_we ? ln - 3'd1 : ln;
    drop  = qn_nx > 3'(QN);
    if (drop) qn_nx = 3'(QN);
  end

  always_ff @(posedge clk) begin
    if (ram_we) mem[wptr[AW-1:0]] <= ram_wd;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr     <= '0;
      rptr     <= '0;
      qn       <= '0;
      overflow <= 1'b0;
      for (int i = 0; i < QN; i++) q[i] <= '0;
    end else begin
      if (ram_we) wptr <= wptr + 1'b1;
      if (rd_pop && !empty) rptr <= rptr + 1'b1;
      q  <= q_nx;
      qn <= qn_nx;
      if (drop) overflow <= 1'b1;
    end
  end


  pop_nonempty: assert property (@(posedge clk) disable iff (rst) rd_pop |-> !empty);


endmodule
