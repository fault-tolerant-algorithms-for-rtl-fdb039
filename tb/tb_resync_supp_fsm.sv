// tb_resync_supp_fsm: directed walk through the resynchronization agreement
// machine of a 5-node instance with short timeouts (R2 = 60, 2 theta d = 17,
// 4 theta d = 34, R1 = 100 ticks, a tick every cycle).
//  - none -> supp j picks the lowest j showing init, resets the supp flags
//    and makes the node show supp;
//  - a node that was just supported is blocked by (R2, supp j) until that
//    timeout expires, another node k is not (supp j -> supp k);
//  - (2 theta d, supp j) returns to none 19 cycles after the last switch;
//  - >= n-f supp leads to supp->resync, then resync after 36 cycles and none
//    after 102 cycles counted from the resynchronization point (a timeout of
//    T ticks is seen T+1 cycles after its retrigger and acted on one later).
module tb_resync_supp_fsm;
  import fatal_pkg::*;
  localparam int N = 5;
  logic clk = 1'b0, rst_n = 1'b0, nf_supp = 1'b0;
  logic [N-1:0] init_obs = '0;
  rsupp_state_t state;
  logic [2:0] idx;
  flags_t clr;
  logic sig_supp, in_resync;
  int checks = 0, failures = 0;
  timeouts_t to;

  always #5 clk = ~clk;

  resync_supp_fsm #(.N(N), .F(1)) dut (.clk, .rst_n, .tick(1'b1), .to, .init_obs, .nf_supp,
                                      .state, .idx, .clr, .sig_supp, .in_resync);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (state=%s idx=%0d)", what, state.name(), idx); end
  endtask

  // Apply inputs after the falling edge, sample the combinational clr, then
  // step one rising edge.
  task automatic step(logic [N-1:0] io, logic ns, output flags_t c);
    @(negedge clk) init_obs = io; nf_supp = ns;
    #1 c = clr;
    @(posedge clk); #1;
  endtask

  initial begin
    flags_t c;
    int n;
    to = DEFAULT_TIMEOUTS;
    to.r2 = 20'd60; to.tsupp = 20'd17; to.tsr = 20'd34; to.r1 = 20'd100;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(state == RS_NONE && !sig_supp && !in_resync, "none after reset");
    step('0, 1'b1, c); check(state == RS_NONE, "n-f supp alone does nothing in none");
    step(5'b10100, 1'b0, c);
    check(c.supp && c == flags_t'(6'b000001), "switch to supp resets the supp flags only");
    check(state == RS_SUPP && idx == 2 && sig_supp, "none -> supp 2 (lowest index)");
    step(5'b10100, 1'b0, c);
    check(state == RS_SUPP && idx == 4 && c.supp, "supp 2 -> supp 4 (other node in init)");
    step(5'b10100, 1'b0, c);
    check(state == RS_SUPP && idx == 4 && !c.supp, "2 and 4 blocked by their R2 timeouts");
    // Let (2 theta d, supp j) run out: 18 cycles after the last switch.
    n = 1;
    while (state == RS_SUPP && n < 100) begin step('0, 1'b0, c); n++; end
    check(state == RS_NONE && n == 19, $sformatf("supp -> none after %0d cycles", n));
    step(5'b00100, 1'b0, c);
    check(state == RS_NONE, "node 2 still blocked by (R2, supp 2)");
    // Wait until R2 of node 2 (retriggered ~21 cycles ago) has expired.
    repeat (45) step(5'b00100, 1'b0, c);
    check(state == RS_SUPP && idx == 2, "node 2 supported again after R2");
    step('0, 1'b1, c);
    check(state == RS_SUPP_RES && sig_supp && !in_resync, "n-f supp -> supp->resync");
    n = 1;
    while (state == RS_SUPP_RES && n < 200) begin step(5'b11111, 1'b0, c); n++; end
    check(state == RS_RESYNC && in_resync && !sig_supp && n == 37,
          $sformatf("resync after %0d cycles", n));
    while (state == RS_RESYNC && n < 300) begin step(5'b11111, 1'b1, c); n++; end
    check(state == RS_NONE && n == 103, $sformatf("none again after %0d cycles", n));
    step(5'b01000, 1'b0, c);
    check(state == RS_SUPP && idx == 3, "fresh support after resync");
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
