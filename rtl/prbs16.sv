// prbs16: 16-bit pseudo-random test-pattern source for the standalone trigger
// test mode.
//
// A Fibonacci linear-feedback shift register, reset to all ones. Each enabled
// clock it shifts by one bit toward the MSB and the feedback bit
// q[15] ^ q[13] ^ q[12] ^ q[10] (polynomial x^16 + x^14 + x^13 + x^11 + 1)
// enters bit 0. The seed, the taps and the one-bit-per-clock shift follow the
// published test setup; the shift direction and the enable (the register
// advances only when its value is consumed) are this design's choices.
// q is the current register value, used as a signed 16-bit sample.
module prbs16 #(
  parameter logic [15:0] SEED = 16'hFFFF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [15:0] q
);

  logic fb;
  assign fb = q[15] ^ q[13] ^ q[12] ^ q[10];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= SEED;
    else if (en) q <= {q[14:0], fb};
  end

  // the all-zero state would lock the sequence
  assert property (@(posedge clk) disable iff (!rst_n) q != '0)
    else $error("prbs16: LFSR reached the all-zero state");

endmodule
