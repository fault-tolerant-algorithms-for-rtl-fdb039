// tb_resync_init_fsm: with R3 on [50, 80] ticks and a tick every cycle, the
// machine must emit init for exactly one cycle at a time, and the distance
// between two init cycles must lie in [lo+3, lo+span+3] (one cycle back to
// wait, the drawn duration, the expiry flop, one cycle to init). 100 intervals are
// measured; they must not all be equal.
module tb_resync_init_fsm;
  import fatal_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  rinit_state_t state;
  int checks = 0, failures = 0;
  timeouts_t to;

  always #5 clk = ~clk;

  resync_init_fsm #(.SEED(32'h0BAD_5EED)) dut (.clk, .rst_n, .tick(1'b1), .to, .state);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int gap, mn, mx, last;
    to = DEFAULT_TIMEOUTS;
    to.r3_lo = 20'd50;
    to.r3_span = 20'd30;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    mn = 1000; mx = 0; last = -1;
    for (int c = 0; c < 20000 && checks < 200; c++) begin
      @(posedge clk); #1;
      if (state == RI_INIT) begin
        @(posedge clk); #1 check(state == RI_WAIT, "init lasts one cycle");
        if (last >= 0) begin
          gap = c - last;
          if (gap < mn) mn = gap;
          if (gap > mx) mx = gap;
          check(gap >= 53 && gap <= 83, $sformatf("init interval %0d", gap));
        end
        c++;
        last = c - 1;
      end
    end
    check(checks >= 150, "enough init events");
    check(mx > mn, "intervals vary");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
