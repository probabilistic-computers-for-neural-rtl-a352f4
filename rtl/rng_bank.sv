// rng_bank: a bank of xoshiro128++ generators that hands every p-bit its own
// RW-bit random number on every clock.
//
// Each generator yields 32 bits per clock, which are cut into 32/RW random
// numbers; the bank holds ceil(N_OUT * RW / 32) generators, each seeded from
// SEED_BASE and its index (pc_pkg::seed_for), so no two generators share a
// sequence. Output j is bits [j*RW +: RW] of the concatenated generator
// outputs and is read as a two's-complement number uniform on
// [-2^(RW-1), 2^(RW-1)-1]. All generators advance together while en_i is high.
// Sharing one generator between several p-bits is this design's choice for
// area; the source states only that a xoshiro generator supplies the
// randomness.
module rng_bank
  import pc_pkg::*;
#(
  parameter int unsigned N_OUT     = 8,
  parameter int unsigned RW        = RND_BITS,
  parameter logic [63:0] SEED_BASE = 64'h0123_4567_89AB_CDEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en_i,
  output logic [N_OUT*RW-1:0]   rnd_o
);
  localparam int unsigned NGEN = (N_OUT * RW + 31) / 32;

  logic [NGEN*32-1:0] bits;

  for (genvar g = 0; g < NGEN; g++) begin : g_gen
    xoshiro128pp #(.SEED(seed_for(SEED_BASE, g))) u_prng (
      .clk  (clk),
      .rst_n(rst_n),
      .en_i (en_i),
      .rnd_o(bits[g*32 +: 32])
    );
  end

  assign rnd_o = bits[N_OUT*RW-1:0];
endmodule
