// tb_fatal_node: one node (index 0 of n = 5) whose four peers are played by
// the testbench. By default every peer mirrors the node's own word with a
// two-cycle delay, i.e. the peers behave exactly like the node, which is
// the view a node has of a perfectly synchronized fault-free system. Short
// timeouts are used (T2 = 300, T3 = 60, T4 = 100, T7 = 200, R1 = 1000 ticks,
// a tick every cycle); the node's own R3 is set beyond the end of the test.
// Phases:
//  1. From reset (recover, dormant) the peers 1..3 show init for one cycle;
//     the node must support node 1, reach the resynchronization point via
//     >= n-f supp, enter resync, make its extension machine passive, join
//     after T7, propose, and accept (first pulse).
//  2. Steady state: pulses repeat with a constant period in
//     [T2+T4+2, T2+T4+12] cycles; each PULSE_i lasts T_y+2 cycles and, as
//     DARTS_i never falls, force_mark follows each pulse. The extension
//     machine goes active on >= f+1 sleep->waking and dormant after R1.
//  3. DARTS_i is driven high during ready: the node proposes on T3 and the
//     DARTS flag, so the period shortens by T4-T3; DARTS_i falling while the
//     pulse is high suppresses force_mark.
//  4. Peer 4 goes silent (Byzantine crash): n-f = 4 nodes remain, pulses go on.
module tb_fatal_node;
  import fatal_pkg::*;
  localparam int N = 5;

  function automatic timeouts_t test_timeouts();
    timeouts_t t;
    t = DEFAULT_TIMEOUTS;
    t.t2 = 20'd300; t.t3 = 20'd60; t.t4 = 20'd100; t.t5 = 20'd120;
    t.t6 = 20'd340; t.t7 = 20'd200; t.r1 = 20'd1000; t.r2 = 20'd3000;
    t.r3_lo = 20'd900000; t.r3_span = 20'd10; t.ty = 20'd20;
    return t;
  endfunction
  localparam timeouts_t TO = test_timeouts();

  logic clk = 1'b0, rst_n = 1'b0, darts = 1'b0;
  chan_word_t [N-1:0] rx;
  chan_word_t tx, tx_d1, tx_d2;
  logic pulse, force_mark;
  core_state_t core_state;
  susp_state_t susp_state;
  ext_state_t ext_state;
  rinit_state_t rinit_state;
  rsupp_state_t rsupp_state;
  logic [N-1:0] inject_init = '0, silent = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fatal_node #(.N(N), .F(1), .TO(TO), .SEED(32'hC0FF_EE01)) dut (
    .clk, .rst_n, .tick(1'b1), .darts, .rx, .tx, .pulse, .force_mark,
    .core_state, .susp_state, .ext_state, .rinit_state, .rsupp_state);

  always_ff @(posedge clk) begin
    tx_d1 <= tx;
    tx_d2 <= tx_d1;
  end

  always_comb begin
    for (int j = 0; j < N; j++) begin
      rx[j] = tx_d2;
      if (silent[j]) rx[j] = '{init: 1'b0, supp: 1'b0, core: S_OTHER};
      if (inject_init[j]) rx[j].init = 1'b1;
    end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (core=%s)", what, core_state.name()); end
  endtask

  // Cycle counter and pulse / force_mark monitors.
  longint cyc = 0;
  longint last_rise = -1, period = 0, width = 0, rise_at = 0;
  int pulses = 0, marks = 0, widths_bad = 0, saw_active = 0, saw_passive = 0, saw_resync = 0;
  logic pulse_q = 1'b0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    pulse_q <= pulse;
    if (pulse && !pulse_q) begin
      pulses <= pulses + 1;
      if (last_rise >= 0) period <= cyc - last_rise;
      last_rise <= cyc;
      rise_at <= cyc;
    end
    if (!pulse && pulse_q && (cyc - rise_at) != longint'(TO.ty) + 2) widths_bad <= widths_bad + 1;
    if (force_mark) marks <= marks + 1;
    if (ext_state == X_ACTIVE) saw_active <= 1;
    if (ext_state == X_PASSIVE) saw_passive <= 1;
    if (rsupp_state == RS_RESYNC) saw_resync <= 1;
  end

  task automatic wait_pulses(int k, int max_cycles);
    int p0;
    p0 = pulses;
    for (int c = 0; c < max_cycles && pulses < p0 + k; c++) @(posedge clk);
    #1;
  endtask

  initial begin
    int p0, m0;
    longint per4;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (20) @(negedge clk);
    check(core_state == C_RECOVER && ext_state == X_DORMANT && rsupp_state == RS_NONE,
          "reset state recover / dormant / none");
    // Phase 1
    inject_init = 5'b01110;
    @(negedge clk) inject_init = '0;
    repeat (3) @(negedge clk);
    check(rsupp_state == RS_SUPP && dut.supp_idx == 1, "supports node 1 (lowest index)");
    check(tx.supp, "node shows supp");
    repeat (10) @(negedge clk);
    check(rsupp_state == RS_SUPP_RES, "resynchronization point after n-f supp");
    repeat (60) @(negedge clk);
    check(rsupp_state == RS_RESYNC && ext_state == X_PASSIVE, "resync, extension passive");
    check(core_state == C_RECOVER, "still recovering before T7");
    wait_pulses(1, 2000);
    check(pulses == 1, "first pulse after join and propose");
    check(saw_passive == 1 && saw_resync == 1, "passive and resync seen");
    // Phase 2
    wait_pulses(2, 2000);
    per4 = longint'(TO.t2) + longint'(TO.t4);
    check(period >= per4 + 2 && period <= per4 + 12, $sformatf("T4 period %0d", period));
    p0 = int'(period);
    wait_pulses(1, 2000);
    check(period == p0, "constant period");
    check(widths_bad == 0, "pulse width T_y+2");
    check(marks >= 2, "force_mark after pulses without DARTS_i");
    check(saw_active == 1, "extension machine went active");
    repeat (1200) @(negedge clk);
    check(ext_state == X_DORMANT && rsupp_state == RS_NONE, "dormant / none after R1");
    // Phase 3: DARTS_i high during ready, falling inside the next pulse.
    wait (core_state != C_READY);
    wait (core_state == C_READY);
    @(negedge clk) darts = 1'b1;
    m0 = marks;
    wait_pulses(1, 2000);
    check(period <= longint'(TO.t2) + longint'(TO.t3) + 12 && period >= longint'(TO.t2) + longint'(TO.t3) + 2,
          $sformatf("T3 + DARTS period %0d", period));
    repeat (5) @(negedge clk);
    darts = 1'b0;
    repeat (40) @(negedge clk);
    check(marks == m0, "no force_mark when DARTS_i fell during the pulse");
    wait_pulses(1, 2000);
    check(period >= per4 + 2 && period <= per4 + 12, $sformatf("back to T4 period %0d", period));
    // Phase 4
    silent = 5'b10000;
    p0 = pulses;
    wait_pulses(3, 5000);
    check(pulses == p0 + 3, "pulses continue with one silent peer");
    check(widths_bad == 0, "pulse width T_y+2 throughout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
