// tb_suspect_fsm: trust -> suspect needs both >= f+1 accept and ready; the
// machine returns to trust as soon as ready is left; (2 theta d, suspect) =
// 17 ticks is seen 18 cycles after the switch to suspect (tick every cycle)
// and is cleared on the next switch to suspect.
module tb_suspect_fsm;
  import fatal_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, f1_accept = 1'b0, in_ready = 1'b0;
  susp_state_t state;
  logic sus_expired;
  int checks = 0, failures = 0;
  timeouts_t to;

  always #5 clk = ~clk;

  suspect_fsm dut (.clk, .rst_n, .tick(1'b1), .to, .f1_accept, .in_ready, .state, .sus_expired);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cyc(logic fa, logic rd);
    @(negedge clk) f1_accept = fa; in_ready = rd;
    @(posedge clk); #1;
  endtask

  initial begin
    int n;
    to = DEFAULT_TIMEOUTS;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(state == SU_TRUST, "trust after reset");
    cyc(1, 0); check(state == SU_TRUST, "accept alone does not suspect");
    cyc(0, 1); check(state == SU_TRUST, "ready alone does not suspect");
    cyc(1, 1); check(state == SU_SUSPECT, "ready and f+1 accept -> suspect");
    check(!sus_expired, "timeout just retriggered");
    n = 1;
    while (!sus_expired && n < 100) begin cyc(0, 1); n++; end
    check(n == int'(to.tsus) + 2, $sformatf("suspect timeout after %0d cycles", n));
    check(state == SU_SUSPECT, "stays in suspect while ready");
    cyc(0, 0); check(state == SU_TRUST, "leaving ready -> trust");
    cyc(1, 1); check(state == SU_SUSPECT && !sus_expired, "second suspect retriggers timeout");
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
