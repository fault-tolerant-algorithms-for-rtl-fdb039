// tb_remote_flag_unit: drives received words into one flag unit and checks
// each memory flag against a reference kept by the test: a flag kind is set
// one cycle after its state was observed, stays set when the sender moves on,
// is cleared by its clr bit and is set again at once if the sender is still
// observed in that state while the clear is applied. Random words and random
// clear masks are used after a few directed steps.
module tb_remote_flag_unit;
  import fatal_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  chan_word_t obs;
  flags_t clr, flags, ref_f;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  remote_flag_unit dut (.clk, .rst_n, .obs, .clr, .flags);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic flags_t decode(chan_word_t w);
    flags_t f;
    f = '0;
    if (w.core == S_RECOVER) f.recover = 1'b1;
    if (w.core == S_ACCEPT)  f.accept  = 1'b1;
    if (w.core == S_JOIN)    f.joined  = 1'b1;
    if (w.core == S_PROPOSE) f.propose = 1'b1;
    if (w.core == S_SLEEPWK) f.sleepwk = 1'b1;
    f.supp = w.supp;
    return f;
  endfunction

  task automatic step(chan_word_t w, flags_t c);
    @(negedge clk);
    obs = w; clr = c;
    @(posedge clk);
    for (int b = 0; b < 6; b++) begin
      if (c[b]) ref_f[b] = 1'b0;
    end
    ref_f = ref_f | decode(w);
    #1 check(flags == ref_f, $sformatf("flags %b want %b (word %h clr %b)", flags, ref_f, w, c));
  endtask

  initial begin
    obs = '0; clr = '0; ref_f = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    #1 check(flags == '0, "flags clear after reset");
    step('{init: 1'b0, supp: 1'b0, core: S_PROPOSE}, '0);
    check(flags.propose, "propose flag set");
    step('{init: 1'b0, supp: 1'b1, core: S_ACCEPT}, '0);
    check(flags.propose && flags.accept && flags.supp, "flags persist");
    step('{init: 1'b0, supp: 1'b0, core: S_OTHER}, '{default: 1'b0, propose: 1'b1});
    check(!flags.propose && flags.accept, "propose cleared, accept kept");
    step('{init: 1'b0, supp: 1'b0, core: S_ACCEPT}, '{default: 1'b0, accept: 1'b1});
    check(flags.accept, "clear while observed leaves flag set");
    step('{init: 1'b1, supp: 1'b0, core: S_JOIN}, '1);
    check(flags == flags_t'(6'b001000), "clear all, join observed");
    for (int r = 0; r < 400; r++) step(chan_word_t'($urandom), flags_t'($urandom_range(0, 63) & (r % 3 == 0 ? 63 : 0)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
