// resync_init_fsm: the wait/init machine of the resynchronization routine
// (left part of the paper's resynchronization figure).
//
// In wait the node runs the randomized timeout (R3, wait). When it expires the
// machine switches to init, which all nodes see on the node's "init" signal
// bit, and in the next cycle back to wait (guard "true"), retriggering R3 with
// a fresh random duration. Nothing else in the node influences this machine,
// so faulty nodes cannot steer the times of init.
// init lasts exactly one clk cycle; the channels carry every cycle, so every
// receiver sees it. After rst_n the machine is in wait with a fresh draw.
// Every machine gets the node's whole timeout bundle (timeouts_t) and reads
// only its own fields; lint reports the other bits of that input as unused.
module resync_init_fsm
  import fatal_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         tick,
  input  timeouts_t    to,
  output rinit_state_t state
);

  logic r3_exp;
  tval_t r3_val;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           state <= RI_WAIT;
    else if (state == RI_INIT)            state <= RI_WAIT;
    else if (r3_exp)                      state <= RI_INIT;
  end

  random_watchdog #(.SEED(SEED)) u_r3 (
    .clk, .rst_n, .tick,
    .retrig (state == RI_INIT),      // switch init -> wait
    .lo     (to.r3_lo),
    .span   (to.r3_span),
    .expired(r3_exp),
    .to_reg (r3_val)
  );

  logic unused_r3;
  assign unused_r3 = ^r3_val;

endmodule
