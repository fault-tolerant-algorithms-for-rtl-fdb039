// tb_random_watchdog: retriggers the randomized timeout 300 times with
// lo = 40, span = 60 and a tick in every cycle, and measures each time from
// retrigger to expiry. Every duration must lie in [lo+1, lo+span+1] cycles
// (expiry is visible one cycle after the last counted tick), the loaded value
// must lie in [lo, lo+span], and the draws must spread over the interval: each
// of its three thirds must be hit at least 40 times, and consecutive draws
// must not all repeat.
module tb_random_watchdog;
  import fatal_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, retrig = 1'b0;
  logic expired;
  tval_t to_reg;
  int checks = 0, failures = 0;
  localparam int LO = 40, SPAN = 60;
  int hits [3];
  int same;
  tval_t prev;

  always #5 clk = ~clk;

  random_watchdog #(.SEED(32'hC0FF_EE11)) dut (
    .clk, .rst_n, .tick(1'b1), .retrig, .lo(tval_t'(LO)), .span(tval_t'(SPAN)),
    .expired, .to_reg);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int dur;
    hits = '{0, 0, 0};
    same = 0;
    prev = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int r = 0; r < 300; r++) begin
      repeat ($urandom_range(0, 7)) @(negedge clk);
      @(negedge clk) retrig = 1'b1;
      @(negedge clk) retrig = 1'b0;
      check(to_reg >= LO && to_reg <= LO + SPAN, $sformatf("draw %0d out of range", to_reg));
      if (to_reg == prev) same++;
      prev = to_reg;
      if (to_reg < LO + SPAN / 3) hits[0]++;
      else if (to_reg < LO + 2 * SPAN / 3) hits[1]++;
      else hits[2]++;
      dur = 0;
      while (!expired && dur < 1000) begin
        @(posedge clk); #1;
        dur++;
      end
      check(dur == int'(to_reg) + 1, $sformatf("duration %0d for draw %0d", dur, to_reg));
      check(dur >= LO + 1 && dur <= LO + SPAN + 1, $sformatf("duration %0d out of range", dur));
    end
    for (int b = 0; b < 3; b++) check(hits[b] >= 40, $sformatf("third %0d hit %0d times", b, hits[b]));
    check(same < 30, "draws repeat too often");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
