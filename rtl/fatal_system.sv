// fatal_system: n FATAL nodes, fully connected by state channels.
//
// Every node j drives one state_channel to every node i, itself included (the
// protocol needs the loop-back channel S_{i,i} for the self-observation in the
// memory flags). Per channel, the fault-injection inputs can replace what
// node i receives from node j by any word: this is how a testbench plays a
// Byzantine node (different words to different receivers) or a faulty
// channel. With all fault_en low the system is fault-free.
//
// Each node has its own tick input, the ticks of its local oscillator, so that
// a testbench can give the nodes different clock rates (drift). The DARTS
// clocks are outside this design: their DARTS_i signals come in as the darts
// inputs, and PULSE_i and force_mark go out. The states of all five machines
// of every node are outputs for observation.
//
// Timing: a state change of node j reaches the flags of node i after
// CH_DELAY + 1 cycles; the maximum delay d of the protocol (8 ticks in the
// default timeouts) must cover CH_DELAY + 2 cycles at the slowest tick rate.
module fatal_system
  import fatal_pkg::*;
#(
  parameter int unsigned N        = 5,
  parameter int unsigned F        = 1,
  parameter int unsigned CH_DELAY = 2,
  parameter timeouts_t   TO       = DEFAULT_TIMEOUTS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic         [N-1:0]         tick,
  input  logic         [N-1:0]         darts,
  input  logic         [N-1:0][N-1:0]  fault_en,     // [receiver][sender]
  input  chan_word_t   [N-1:0][N-1:0]  fault_word,   // [receiver][sender]
  output logic         [N-1:0]         pulse,
  output logic         [N-1:0]         force_mark,
  output chan_word_t   [N-1:0]         tx,
  output core_state_t  [N-1:0]         core_state,
  output susp_state_t  [N-1:0]         susp_state,
  output ext_state_t   [N-1:0]         ext_state,
  output rinit_state_t [N-1:0]         rinit_state,
  output rsupp_state_t [N-1:0]         rsupp_state
);

  chan_word_t [N-1:0][N-1:0] rx;   // [receiver][sender]

  for (genvar i = 0; i < N; i++) begin : g_node
    for (genvar j = 0; j < N; j++) begin : g_ch
      chan_word_t ch_out;
      state_channel #(.DELAY(CH_DELAY)) u_ch (.clk, .rst_n, .din(tx[j]), .dout(ch_out));
      assign rx[i][j] = fault_en[i][j] ? fault_word[i][j] : ch_out;
    end

    fatal_node #(
      .N(N), .F(F), .TO(TO),
      .SEED(32'h9E37_79B9 * (i + 1) ^ 32'h5A5A_1234)
    ) u_node (
      .clk, .rst_n,
      .tick       (tick[i]),
      .darts      (darts[i]),
      .rx         (rx[i]),
      .tx         (tx[i]),
      .pulse      (pulse[i]),
      .force_mark (force_mark[i]),
      .core_state (core_state[i]),
      .susp_state (susp_state[i]),
      .ext_state  (ext_state[i]),
      .rinit_state(rinit_state[i]),
      .rsupp_state(rsupp_state[i])
    );
  end

endmodule
