// xoshiro128pp: one xoshiro128++ pseudo-random number generator.
//
// The p-bits draw their uniform random numbers from the xoshiro family of
// generators. This is the 32-bit-output, 128-bit-state member xoshiro128++
// (Blackman and Vigna): output = rotl(s0 + s3, 7) + s0, then the state steps
//   t = s1 << 9; s2 ^= s0; s3 ^= s1; s1 ^= s2; s0 ^= s3; s2 ^= t;
//   s3 = rotl(s3, 11).
// The choice of the ++ scrambler and of one 32-bit word per clock is this
// design's; the source only names the xoshiro family.
//
// Interface: rnd_o is the output for the current state and is valid one clock
// after reset is released; each clock with en_i high advances the state, so
// rnd_o changes every enabled clock. SEED must not be zero. Reset is
// asynchronous, active low.
module xoshiro128pp #(
  parameter logic [127:0] SEED = 128'h0000_0004_0000_0003_0000_0002_0000_0001
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en_i,
  output logic [31:0] rnd_o
);
  logic [31:0] s0, s1, s2, s3;

  function automatic logic [31:0] rotl(input logic [31:0] x, input int unsigned k);
    return (x << k) | (x >> (32 - k));
  endfunction

  assign rnd_o = rotl(s0 + s3, 7) + s0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s3, s2, s1, s0} <= SEED;
    end else if (en_i) begin
      s0 <= s0 ^ (s3 ^ s1);
      s1 <= s1 ^ (s2 ^ s0);
      s2 <= s2 ^ s0 ^ (s1 << 9);
      s3 <= rotl(s3 ^ s1, 11);
    end
  end
endmodule
