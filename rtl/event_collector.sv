// event_collector: merges the event fragments of the F1-blocks into one S-Link stream.
//
// Runs in the S-Link clock domain on the read sides of the blocks' S-Link FIFOs.
// Every F1-block writes exactly one fragment (header, data words, trailer) per
// trigger and all blocks see the same triggers, so the fragments of one event are
// the first fragment waiting in every block. As soon as block 0 has data, the
// collector writes an S-Link control word (event header), then copies block 0's
// words up to and including its trailer, then those of block 1 and so on, and closes
// the event with a control trailer word. It waits (without losing data) whenever a
// block has no word yet or the link signals full.
//   event header  (slink_ctrl=1): 8'hB0, event number[23:0]
//   event trailer (slink_ctrl=1): 8'hE0, number of data words of the event[23:0]
// Timing: one word per s_clk edge when data is waiting and the link is not full.
// Collecting the 16 blocks' data for the S-Link follows the published design; the
// order, the framing words and the handshake are this design's own choices (the
// S-Link protocol itself is not modelled).
module event_collector
  import tdc_pkg::*;
#(
  parameter int NBLK = NBLOCKS
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [NBLK-1:0]      f_empty,
  input  word_t [NBLK-1:0]     f_dout,
  output logic [NBLK-1:0]      f_pop,
  input  logic                 slink_full,
  output word_t                slink_data,
  output logic                 slink_wen,
  output logic                 slink_ctrl,
  output logic [23:0]          n_events
);

  localparam int BW = (NBLK > 1) ? $clog2(NBLK) : 1;

  typedef enum logic [1:0] {C_IDLE, C_COPY, C_TRAILER} cstate_e;

  cstate_e      state;
  logic [BW-1:0] blk;
  logic [23:0]  nwords;
  logic         take;
  word_t        w;

  assign w    = f_dout[blk];
  assign take = (state == C_COPY) && !f_empty[blk] && !slink_full;

  always_comb begin
    f_pop      = '0;
    f_pop[blk] = take;
    slink_wen  = 1'b0;
    slink_ctrl = 1'b0;
    slink_data = '0;
    unique case (state)
      C_IDLE: begin
        slink_wen  = !f_empty[0] && !slink_full;
        slink_ctrl = 1'b1;
        slink_data = {8'hB0, n_events};
      end
      C_COPY: begin
        slink_wen  = take;
        slink_data = w;
      end
      C_TRAILER: begin
        slink_wen  = !slink_full;
        slink_ctrl = 1'b1;
        slink_data = {8'hE0, nwords};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= C_IDLE;
      blk      <= '0;
      nwords   <= '0;
      n_events <= '0;
    end else begin
      unique case (state)
        C_IDLE: if (slink_wen) begin
          blk    <= '0;
          nwords <= '0;
          state  <= C_COPY;
        end
        C_COPY: if (take) begin
          nwords <= nwords + 24'd1;
          if (word_type_e'(w[31:30]) == W_TRAILER) begin
            if (blk == BW'(NBLK - 1)) state <= C_TRAILER;
            else                      blk   <= blk + 1'b1;
          end
        end
        C_TRAILER: if (!slink_full) begin
          n_events <= n_events + 24'd1;
          state    <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
