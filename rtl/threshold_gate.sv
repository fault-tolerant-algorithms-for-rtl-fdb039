// threshold_gate: the threshold module of the paper's memory-flag figure.
//
// Counts how many of its N inputs are set and asserts ge when that number is
// at least K. The node uses it for every threshold condition of the protocol,
// such as ">= f+1 propose" or ">= n-f accept"; for conditions that name two
// states ("propose or accept") the inputs are the per-sender OR of two flag
// kinds. Purely combinational; the inputs are memory flags, which are stable,
// so the output is glitch-free in the sense the paper requires.
module threshold_gate #(
  parameter int unsigned N = 5,
  parameter int unsigned K = 2
) (
  input  logic [N-1:0] in,
  output logic         ge
);

  always_comb begin
    int unsigned cnt;
    cnt = 0;
    for (int unsigned j = 0; j < N; j++) cnt += {31'd0, in[j]};
    ge = (cnt >= K);
  end

endmodule
