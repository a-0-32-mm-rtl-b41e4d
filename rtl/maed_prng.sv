// maed_prng: xorshift pseudorandom number generator with a 64-bit state (Marsaglia's xorshift64,
// shifts 13, 7, 17), used to draw the start vector u of the power iteration (line 5 of MAED).
// When `en` is high the state advances by one xorshift step at the clock edge. The vector u has
// B=8 complex entries, each part +1 or -1: part re of u_b is -1 when state bit 2b is set, part
// im when bit 2b+1 is set (integer format, so u is exact). xorshift with a 64-bit state is the
// published choice; the shift triple, the seed and the bit-to-u mapping are this design's.
module maed_prng
  import maed_pkg::*;
#(
  parameter logic [63:0] SEED = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [63:0] state,
  output cb_t         u [B]
);
  function automatic logic [63:0] step(input logic [63:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 7);
    x = x ^ (x << 17);
    return x;
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  state <= SEED;
    else if (en) state <= step(state);

  always_comb
    for (int b = 0; b < B; b++) begin
      u[b].re = state[2*b]   ? -WB'(1) : WB'(1);
      u[b].im = state[2*b+1] ? -WB'(1) : WB'(1);
    end
endmodule
