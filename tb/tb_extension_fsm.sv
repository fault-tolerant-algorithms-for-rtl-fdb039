// tb_extension_fsm: dormant -> passive on resync with a reset of the join and
// sleep->waking flags; passive -> active on >= f+1 sleep->waking; back to
// dormant when resync ends, from either state. The timeouts (T7, passive) and
// (T6, active) are shortened to 30 and 12 ticks and must expire 31 and 13
// cycles after the switch to their state.
module tb_extension_fsm;
  import fatal_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_resync = 1'b0, f1_sleepwk = 1'b0;
  ext_state_t state;
  flags_t clr;
  logic t6_expired, t7_expired;
  int checks = 0, failures = 0;
  timeouts_t to;

  always #5 clk = ~clk;

  extension_fsm dut (.clk, .rst_n, .tick(1'b1), .to, .in_resync, .f1_sleepwk, .state, .clr,
                     .t6_expired, .t7_expired);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cyc(logic rs, logic sw);
    @(negedge clk) in_resync = rs; f1_sleepwk = sw;
    #1;
  endtask

  initial begin
    int n;
    to = DEFAULT_TIMEOUTS;
    to.t7 = 20'd30;
    to.t6 = 20'd12;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(state == X_DORMANT, "dormant after reset");
    cyc(0, 1); check(clr == '0, "no reset request while dormant");
    @(posedge clk); #1 check(state == X_DORMANT, "sleep->waking alone keeps dormant");
    cyc(1, 0);
    check(clr.joined && clr.sleepwk && !clr.accept && !clr.propose && !clr.supp && !clr.recover,
          "dormant->passive resets join and sleep->waking flags");
    @(posedge clk); #1 check(state == X_PASSIVE, "resync -> passive");
    n = 0;
    while (!t7_expired && n < 100) begin @(posedge clk); #1; n++; end
    check(n == 31, $sformatf("T7 after %0d cycles", n));
    cyc(1, 1); @(posedge clk); #1 check(state == X_ACTIVE, "f+1 sleep->waking -> active");
    n = 0;
    while (!t6_expired && n < 100) begin @(posedge clk); #1; n++; end
    check(n == 13, $sformatf("T6 after %0d cycles", n));
    cyc(0, 0); @(posedge clk); #1 check(state == X_DORMANT, "active -> dormant when resync ends");
    cyc(1, 0); @(posedge clk); #1 check(state == X_PASSIVE, "passive again");
    check(!t7_expired, "T7 retriggered");
    cyc(0, 1); @(posedge clk); #1 check(state == X_DORMANT, "passive -> dormant wins over active");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
