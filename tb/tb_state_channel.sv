// tb_state_channel: random 5-bit words are sent into channels with DELAY = 2
// and DELAY = 0; each output is compared with the word the test sent DELAY
// cycles earlier (kept in the test's own history array).
module tb_state_channel;
  import fatal_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  chan_word_t din, d2, d0;
  chan_word_t hist [0:3];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  state_channel #(.DELAY(2)) u2 (.clk, .rst_n, .din, .dout(d2));
  state_channel #(.DELAY(0)) u0 (.clk, .rst_n, .din, .dout(d0));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    din = '0;
    for (int k = 0; k < 4; k++) hist[k] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 300; c++) begin
      @(negedge clk);
      din = chan_word_t'($urandom);
      #1 check(d0 == din, "DELAY 0 is a wire");
      @(posedge clk);
      for (int k = 3; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = din;
      #1 check(d2 == hist[1], $sformatf("DELAY 2 word %0d: got %h want %h", c, d2, hist[1]));
    end
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
