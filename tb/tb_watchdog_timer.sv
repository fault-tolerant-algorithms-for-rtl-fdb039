// tb_watchdog_timer: self-checking test of watchdog_timer.
//
// For several timeout values and tick patterns (every cycle, every third
// cycle, pseudo-random) the test retriggers the timer and checks, cycle by
// cycle, that expired is low until one cycle after the T-th tick has been
// counted and high from then on. The expected cycle is worked out from the
// ticks the test itself drives. It also checks that a retrigger clears an
// expired timer and that the RST_EXPIRED variant starts expired.
module tb_watchdog_timer;
  import fatal_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0, retrig = 1'b0;
  tval_t to_val;
  logic expired, expired_r;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  watchdog_timer dut (.clk, .rst_n, .tick, .retrig, .to_val, .expired);
  watchdog_timer #(.RST_EXPIRED(1'b1)) dut_r (.clk, .rst_n, .tick(1'b0), .retrig(1'b0),
                                              .to_val(20'd3), .expired(expired_r));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // mode 0: tick every cycle, 1: every third cycle, 2: random
  task automatic run(int t, int mode);
    int ticks, k, k_t;
    to_val = tval_t'(t);
    @(negedge clk) retrig = 1'b1; tick = 1'b0;
    @(negedge clk) retrig = 1'b0;
    ticks = 0;
    k_t = (t == 0) ? 0 : -1;
    for (k = 1; k <= 4 * t + 12; k++) begin
      // drive cycle k
      case (mode)
        0: tick = 1'b1;
        1: tick = (k % 3 == 0);
        default: tick = 1'($urandom_range(0, 1));
      endcase
      @(posedge clk); #1;
      if (tick) ticks++;
      if (k_t < 0 && ticks == t) k_t = k;
      // expired must be high exactly from the edge after the T-th tick
      check(expired == (k_t >= 0 && k >= k_t + 1),
            $sformatf("T=%0d mode=%0d cycle %0d expired=%0b", t, mode, k, expired));
      @(negedge clk);
    end
    tick = 1'b0;
  endtask

  initial begin
    to_val = 20'd4;
    repeat (2) @(posedge clk);
    #1 check(expired_r == 1'b1, "RST_EXPIRED timer starts expired");
    rst_n = 1'b1;
    #1 check(expired == 1'b0, "fresh timer not expired after reset");
    for (int m = 0; m < 3; m++) begin
      run(0, m);
      run(1, m);
      run(5, m);
      run(13, m);
    end
    // retrigger clears an expired timer
    check(expired == 1'b1, "timer expired at end of run");
    @(negedge clk) retrig = 1'b1;
    @(posedge clk); #1 check(expired == 1'b0, "retrigger clears expired");
    @(negedge clk) retrig = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
