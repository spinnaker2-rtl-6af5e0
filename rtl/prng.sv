// prng -- pseudo random number generator of a PE.
//
// The paper lists pseudo random number generation among the per-core
// accelerators without naming the algorithm.  This one is Marsaglia's 32-bit
// xorshift (shifts 13, 17, 5), period 2^32-1, one new word per cycle on
// `next`.  A zero seed would lock the generator, so it is replaced by the
// reset value.  `value` is the current state; it changes the cycle after
// `next` or `seed_we`.
module prng #(
  parameter logic [31:0] RESET_SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_we,
  input  logic [31:0] seed,
  input  logic        next,
  output logic [31:0] value
);
  function automatic logic [31:0] xorshift32(logic [31:0] s);
    logic [31:0] v;
    v = s ^ (s << 13);
    v = v ^ (v >> 17);
    v = v ^ (v << 5);
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       value <= RESET_SEED;
    else if (seed_we) value <= (seed == '0) ? RESET_SEED : seed;
    else if (next)    value <= xorshift32(value);
  end
endmodule
