// random_watchdog: the randomized timeout (R3, wait) of the resynchronization
// routine.
//
// The paper's simplest implementation is followed: a watchdog timer whose
// timeout register is loaded with a fresh uniformly distributed random value
// every time the watchdog is retriggered. The random source is a 32-bit
// Galois LFSR (taps x^32+x^22+x^2+x+1) that steps every clk cycle, standing in
// for the free-running random source the paper mentions (thermal noise or an
// LFSR clocked by a second oscillator). The loaded value is
//   lo + floor(u * (span+1) / 2^TW),  u = low TW bits of the LFSR,
// i.e. (close to) uniform on [lo, lo+span]. Inside a node nothing reads the
// stored value, as the paper asks; the to_reg output exists for testing.
//
// The LFSR seed is a parameter so that nodes draw independent sequences; the
// seed, the polynomial and the scaling are this design's choices. After rst_n
// the register is loaded as on a retrigger.
// Only bits [2TW-1:TW] of the product u*(span+1) are used: the scaling drops
// the lower TW bits and the top bit is zero for span < 2^TW - 1; lint reports
// the unused bits.
module random_watchdog
  import fatal_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  tick,      // tick of the local clock
  input  logic  retrig,    // watchdog retrigger
  input  tval_t lo,        // least timeout
  input  tval_t span,      // width of the timeout interval
  output logic  expired,
  output tval_t to_reg     // loaded timeout, for observation in test only
);

  logic [31:0] lfsr;
  logic        load_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr <= (SEED == 32'd0) ? 32'h1 : SEED;
    else        lfsr <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
  end

  // Scaled draw: lo + floor(u*(span+1)/2^TW).
  logic [2*TW:0] prod;
  tval_t         draw;
  always_comb begin
    prod = {{(TW+1){1'b0}}, lfsr[TW-1:0]} * ({{(TW){1'b0}}, span} + (2*TW+1)'(1));
    draw = lo + prod[2*TW-1:TW];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      to_reg <= '1;
      load_q <= 1'b1;
    end else begin
      load_q <= 1'b0;
      if (retrig || load_q) to_reg <= draw;
    end
  end

  watchdog_timer #(.RST_EXPIRED(1'b0)) u_wd (
    .clk, .rst_n, .tick, .retrig, .to_val(to_reg), .expired
  );

endmodule
