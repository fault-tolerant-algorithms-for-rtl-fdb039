// state_channel: the channel from one node's output port S_j to one input
// port S_{i,j} of another node (or of itself).
//
// The paper only requires that the receiver sees the sender's state sequence
// with a delay below the bound d. Here the 5-bit state word travels through
// DELAY register stages, a parallel bundled bus, so every state the sender
// holds for at least one cycle reaches the receiver, in order, exactly DELAY
// cycles later. DELAY = 0 is a plain wire. The stage count is this design's
// choice; with the node's own output register and the receiver's flag register
// the end-to-end delay is DELAY+2 cycles, which must stay below d.
module state_channel
  import fatal_pkg::*;
#(
  parameter int unsigned DELAY = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  chan_word_t din,
  output chan_word_t dout
);

  if (DELAY == 0) begin : g_wire
    assign dout = din;
  end else begin : g_pipe
    chan_word_t stage [DELAY];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int unsigned k = 0; k < DELAY; k++) stage[k] <= '0;
      end else begin
        stage[0] <= din;
        for (int unsigned k = 1; k < DELAY; k++) stage[k] <= stage[k-1];
      end
    end
    assign dout = stage[DELAY-1];
  end

endmodule
