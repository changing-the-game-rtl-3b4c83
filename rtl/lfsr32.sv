// lfsr32: 32-bit pseudo-random number generator of the BBIM.
//
// A Fibonacci linear feedback shift register with XNOR feedback, as the
// paper specifies: the XNOR of registers 32, 22, 2 and 1 (numbered 1..32)
// is shifted into the first register. Here register n is bit n-1 of `q`,
// so the feedback is ~(q[31]^q[21]^q[1]^q[0]) and enters at bit 0 while the
// word shifts towards bit 31. This tap set gives the maximal period
// 2^32-1. The all-ones word is the lock-up state of an XNOR register; a
// seed of all ones is therefore replaced by zero (this design's choice, as
// are the seed port and the enable).
//
// Timing: `load` copies the seed at the next clock edge; otherwise the
// register steps once per clock in which `step` is high. `q` is the
// registered state.
module lfsr32 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [31:0] seed,
  input  logic        step,
  output logic [31:0] q
);
  logic fb;
  assign fb = ~(q[31] ^ q[21] ^ q[1] ^ q[0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         q <= '0;
    else if (load)      q <= (&seed) ? 32'd0 : seed;
    else if (step)      q <= {q[30:0], fb};
  end
endmodule
