// resync_supp_fsm: the agreement machine of the resynchronization routine
// (right part of the paper's resynchronization figure).
//
// States: none, supp j (one per node j), supp->resync and resync. Seeing node
// j in init (directly on the channel, not through a flag) while the timeout
// (R2, supp j) has expired moves the machine from none, or from supp k with
// k != j, to supp j; that switch resets the supp flags and retriggers
// (R2, supp j) and (2 theta d, supp j). A node in some supp j that memorizes
// >= n-f nodes in supp goes to supp->resync; otherwise (2 theta d, supp j)
// returns it to none. From supp->resync it reaches resync after
// (4 theta d, supp->resync) and none again after (R1, supp->resync).
// The switch to supp->resync is the locally observed resynchronization point;
// resync is what the extension machine watches.
//
// Only two values leave the node: supp (for supp j and supp->resync) and none
// (for none and resync), the state-to-signal mapping of the paper.
//
// Choices of this design: where several init signals qualify at once, the
// lowest node index wins; the >= n-f supp check wins over moving to another
// supp k, which wins over the return to none. The figure puts the "supp" reset
// box on the lines between none and supp j and between supp j and supp k; it
// is applied on every switch into a supp j state. (R2, supp j) timers start
// expired after rst_n, other timers start a fresh count; the machine starts in
// none. One state register and one index register, updated every cycle.
// Every machine gets the node's whole timeout bundle (timeouts_t) and reads
// only its own fields; lint reports the other bits of that input as unused.
module resync_supp_fsm
  import fatal_pkg::*;
#(
  parameter int unsigned N = 5,
  parameter int unsigned F = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 tick,
  input  timeouts_t            to,
  input  logic [N-1:0]         init_obs,   // S_{i,j} = init, per node j
  input  logic                 nf_supp,    // >= n-f supp memorized
  output rsupp_state_t         state,
  output logic [$clog2(N)-1:0] idx,        // j of supp j
  output flags_t               clr,        // supp flags
  output logic                 sig_supp,   // communicated signal: supp / none
  output logic                 in_resync
);

  localparam int unsigned IW = $clog2(N);

  rsupp_state_t     nxt;
  logic [IW-1:0]    nxt_idx;
  logic [N-1:0]     r2_exp;
  logic             tsupp_exp, tsr_exp, r1_exp;

  // Lowest j with S_{i,j} = init and (R2, supp j) expired, optionally
  // excluding the current index.
  logic [N-1:0] cand;
  always_comb begin
    for (int unsigned j = 0; j < N; j++) cand[j] = init_obs[j] && r2_exp[j];
  end

  always_comb begin
    logic          found;
    logic [IW-1:0] pick;
    found = 1'b0;
    pick  = '0;
    for (int unsigned j = 0; j < N; j++) begin
      if (!found && cand[j] && !(state == RS_SUPP && idx == IW'(j))) begin
        found = 1'b1;
        pick  = IW'(j);
      end
    end

    nxt     = state;
    nxt_idx = idx;
    clr     = '0;
    unique case (state)
      RS_NONE: if (found) begin
        nxt = RS_SUPP;  nxt_idx = pick;  clr.supp = 1'b1;
      end
      RS_SUPP: begin
        if (nf_supp) begin
          nxt = RS_SUPP_RES;
        end else if (found) begin
          nxt_idx = pick;  clr.supp = 1'b1;
        end else if (tsupp_exp) begin
          nxt = RS_NONE;
        end
      end
      RS_SUPP_RES: if (tsr_exp) nxt = RS_RESYNC;
      RS_RESYNC:   if (r1_exp)  nxt = RS_NONE;
      default:     nxt = RS_NONE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= RS_NONE;
      idx   <= '0;
    end else begin
      state <= nxt;
      idx   <= nxt_idx;
    end
  end

  // A switch into supp j: from another state, or from supp k with k != j.
  logic enter_supp, enter_sr;
  assign enter_supp = (nxt == RS_SUPP) && !(state == RS_SUPP && idx == nxt_idx);
  assign enter_sr   = (nxt == RS_SUPP_RES) && (state != RS_SUPP_RES);

  for (genvar j = 0; j < N; j++) begin : g_r2
    watchdog_timer #(.RST_EXPIRED(1'b1)) u_r2 (
      .clk, .rst_n, .tick,
      .retrig (enter_supp && nxt_idx == IW'(j)),
      .to_val (to.r2),
      .expired(r2_exp[j])
    );
  end

  watchdog_timer u_tsupp (.clk, .rst_n, .tick, .retrig(enter_supp), .to_val(to.tsupp), .expired(tsupp_exp));
  watchdog_timer u_tsr   (.clk, .rst_n, .tick, .retrig(enter_sr),   .to_val(to.tsr),   .expired(tsr_exp));
  watchdog_timer u_r1    (.clk, .rst_n, .tick, .retrig(enter_sr),   .to_val(to.r1),    .expired(r1_exp));

  assign sig_supp  = (state == RS_SUPP) || (state == RS_SUPP_RES);
  assign in_resync = (state == RS_RESYNC);

  // F only documents the fault bound the >= n-f input was built for.
  if (F * 3 >= N) begin : g_bad_f
    $error("resync_supp_fsm: F must be below N/3");
  end

endmodule
