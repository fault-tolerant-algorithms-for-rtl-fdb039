// remote_flag_unit: the memory flags node i keeps about one sender j.
//
// Following the paper's memory-flag figure, the received state word is decoded
// (the demultiplexer) into one line per communicated state, and each line sets
// a resettable flag Mem_{i,j,s} that remembers whether j has been observed in
// s since the flag was last reset. The paper builds each flag from a Muller C
// gate with one input tied to 1; here it is a flip-flop, which the paper
// names as an alternative.
//
// A flag kind is cleared by the matching bit of clr (the node's state machines
// request resets of all flags of a kind at once). If j is still observed in s
// while the flag is cleared, the flag is set again in the same cycle, as the
// flag definition demands ("switches to 1 when observed and not already 1").
// Timing: an observation at the input is visible at flags one cycle later.
// The init bit of the word is not kept in a flag (the resynchronization
// machine reads it straight from the channel), so that input bit is unused
// here and lint reports it.
module remote_flag_unit
  import fatal_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  chan_word_t obs,    // S_{i,j}: word received from sender j
  input  flags_t     clr,    // flag kinds to reset
  output flags_t     flags
);

  flags_t seen;

  // Demultiplexer: one line per communicated state.
  always_comb begin
    seen         = '0;
    seen.recover = (obs.core == S_RECOVER);
    seen.accept  = (obs.core == S_ACCEPT);
    seen.joined    = (obs.core == S_JOIN);
    seen.propose = (obs.core == S_PROPOSE);
    seen.sleepwk = (obs.core == S_SLEEPWK);
    seen.supp    = obs.supp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) flags <= '0;
    else        flags <= (flags & ~clr) | seen;
  end

endmodule
