// tb_pulse_coupler: checks PULSE_i and the force-marking request.
// With T_y = 20 and a tick in every cycle, PULSE_i must rise one cycle after
// accept_entry and stay high for exactly T_y + 2 cycles (retrigger, T_y ticks,
// expiry flop). In the first window the DARTS signal falls while PULSE_i is
// high, so no force_mark may appear; in the second it stays high; in the
// third it never rises; in the last two the request must be a single cycle in
// the first cycle in which PULSE_i is low.
module tb_pulse_coupler;
  import fatal_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, accept_entry = 1'b0, darts = 1'b0;
  logic pulse, force_mark;
  int checks = 0, failures = 0;
  localparam int TY = 20;

  always #5 clk = ~clk;

  pulse_coupler dut (.clk, .rst_n, .tick(1'b1), .ty(tval_t'(TY)), .accept_entry, .darts,
                     .pulse, .force_mark);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // fall_at: cycle (after the entry) at which DARTS falls, or -1 for never.
  task automatic window(int fall_at, bit expect_force);
    int width, fm, fm_cycle, c;
    @(negedge clk) accept_entry = 1'b1;
    @(negedge clk) accept_entry = 1'b0;
    check(pulse == 1'b1, "pulse rises one cycle after accept entry");
    width = 0; fm = 0; fm_cycle = -1; c = 0;
    while (c < TY + 10) begin
      if (c == fall_at) darts = 1'b0;
      if (pulse) width++;
      @(posedge clk); #1;
      if (force_mark) begin fm++; fm_cycle = c; end
      c++;
      @(negedge clk);
    end
    check(width == TY + 2, $sformatf("pulse width %0d", width));
    check(fm == (expect_force ? 1 : 0), $sformatf("force_mark pulses %0d", fm));
    if (expect_force) check(fm_cycle == TY + 1, $sformatf("force_mark at %0d", fm_cycle));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(pulse == 1'b0 && force_mark == 1'b0, "idle after reset");
    darts = 1'b1;
    window(8, 1'b0);       // marked tick inside the window
    darts = 1'b1;
    window(-1, 1'b1);      // DARTS_i stuck high
    darts = 1'b0;
    window(-1, 1'b1);      // DARTS_i never rises
    darts = 1'b1;
    window(TY + 5, 1'b1);  // marked tick after the window
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
