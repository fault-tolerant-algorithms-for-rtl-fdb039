// tb_threshold_gate: exhaustive test of threshold_gate for N = 5 and every
// threshold K = 1..5 (the f+1 = 2 and n-f = 4 thresholds of the default system
// among them), and a random test for N = 13. The expected output is the
// population count of the input compared with K, computed with $countones.
module tb_threshold_gate;
  int checks = 0, failures = 0;
  logic [4:0]  in5;
  logic [12:0] in13;
  logic [4:0]  ge5;
  logic        ge13_5, ge13_9;

  for (genvar k = 1; k <= 5; k++) begin : g_k
    threshold_gate #(.N(5), .K(k)) u (.in(in5), .ge(ge5[k-1]));
  end
  threshold_gate #(.N(13), .K(5)) u13a (.in(in13), .ge(ge13_5));
  threshold_gate #(.N(13), .K(9)) u13b (.in(in13), .ge(ge13_9));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int v = 0; v < 32; v++) begin
      in5 = 5'(v);
      #1;
      for (int k = 1; k <= 5; k++)
        check(ge5[k-1] == ($countones(in5) >= k), $sformatf("N=5 K=%0d in=%b", k, in5));
    end
    for (int r = 0; r < 500; r++) begin
      in13 = 13'($urandom);
      #1;
      check(ge13_5 == ($countones(in13) >= 5), $sformatf("N=13 K=5 in=%b", in13));
      check(ge13_9 == ($countones(in13) >= 9), $sformatf("N=13 K=9 in=%b", in13));
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
