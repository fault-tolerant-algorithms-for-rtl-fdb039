// pulse_coupler: the node's side of the coupling between pulse generation and
// a DARTS clock.
//
// PULSE_i tells the DARTS clock that a pulse happened: it rises when the main
// routine switches to accept and falls when the timeout (T_y, pulse), started
// at the rising edge, expires. The DARTS clock reports the marked tick kT by a
// falling edge of DARTS_i; in normal operation that edge falls inside the
// window where PULSE_i is high. This block watches that interleaving: if
// PULSE_i falls without a falling edge of DARTS_i having been seen while it
// was high, force_mark is raised for one cycle, requesting the DARTS clock to
// mark its next tick (or to reset). That is the supervising circuit the paper
// describes in words; the paper builds it asynchronously, here it is a
// clocked circuit with an edge detector on DARTS_i.
//
// Timing: pulse rises one cycle after accept_entry; force_mark is high in the
// cycle after pulse falls. A new accept_entry while pulse is high restarts
// the window. After rst_n pulse is low.
module pulse_coupler
  import fatal_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  tick,
  input  tval_t ty,            // T_y in local ticks
  input  logic  accept_entry,  // main routine switches to accept
  input  logic  darts,         // DARTS_i
  output logic  pulse,         // PULSE_i
  output logic  force_mark
);

  logic ty_exp, darts_q, seen;
  logic darts_fall;

  assign darts_fall = darts_q && !darts;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pulse      <= 1'b0;
      darts_q    <= 1'b0;
      seen       <= 1'b0;
      force_mark <= 1'b0;
    end else begin
      darts_q    <= darts;
      force_mark <= 1'b0;
      if (accept_entry) begin
        pulse <= 1'b1;
        seen  <= 1'b0;
      end else if (pulse) begin
        if (darts_fall) seen <= 1'b1;
        if (ty_exp) begin
          pulse      <= 1'b0;
          force_mark <= !(seen || darts_fall);
        end
      end
    end
  end

  watchdog_timer u_ty (.clk, .rst_n, .tick, .retrig(accept_entry), .to_val(ty), .expired(ty_exp));

endmodule
