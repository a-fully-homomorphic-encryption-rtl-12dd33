// fhe_prng: xorshift64 pseudo-random word generator.
//
// Key generation and encryption need uniformly distributed words and bits.
// The scheme only states that these are sampled uniformly; the generator is
// this design's choice. xorshift64 (shifts 13, 7, 17) gives one new 64-bit
// word per cycle in which `next` is high. It is not cryptographically secure:
// a deployment would replace it by a true random source with the same ports.
//
// Interface: `rnd` shows the current word; `next` advances it at the next
// clock edge. `seed_load` loads `seed` (a zero seed selects SEED_DEFAULT,
// because xorshift never leaves the all-zero state). Reset loads SEED_DEFAULT.
module fhe_prng #(
  parameter logic [63:0] SEED_DEFAULT = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [63:0] seed,
  input  logic        next,
  output logic [63:0] rnd
);

  logic [63:0] state_q;

  function automatic logic [63:0] step(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         state_q <= SEED_DEFAULT;
    else if (seed_load) state_q <= (seed == 64'd0) ? SEED_DEFAULT : seed;
    else if (next)      state_q <= step(state_q);
  end

  assign rnd = state_q;

endmodule
