// pc_pkg: types, constants and elaboration-time helpers shared by the
// p-computer RTL.
//
// Number formats. Weights and biases are 10-bit two's-complement fixed point.
// The shallow FRBM runs with 1 sign, 6 integer and 3 fraction bits (s6.3);
// the deep Boltzmann machine experiment uses 1 sign, 4 integer and 5 fraction
// bits (s4.5). Both are the same 10-bit word; only the binary point moves, so
// the position of the point is a module parameter (FRAC_BITS), not a type.
// A p-bit state is one bit: 1 stands for +1 and 0 for -1.
//
// Connectivity. Every layer of the machine is an L x L periodic lattice and a
// unit couples to the units of the adjacent layer whose Euclidean distance on
// the torus is at most K. The neighbour offsets are enumerated here in a fixed
// order: row offset dr from -K to K, then column offset dc from -K to K,
// keeping those with dr*dr + dc*dc <= K*K. K = 2 gives 13 neighbours
// (self-coupling included), K = 1 gives 5 and K = 3 gives 29. The order is
// point-symmetric: the offset at index s is the negation of the offset at
// index DEG-1-s, which the host uses to place the two copies of a symmetric
// coupling.
package pc_pkg;

  localparam int unsigned W_BITS  = 10;  // weight / bias word width
  localparam int unsigned RND_BITS = 8;  // random number width per p-bit update

  typedef logic signed [W_BITS-1:0] weight_t;

  // Host address map (word addresses on the host command port).
  localparam logic [1:0] HA_CTRL   = 2'b00;  // control and status registers
  localparam logic [1:0] HA_STATE  = 2'b01;  // state snapshot, 32 p-bits per word
  localparam logic [1:0] HA_WEIGHT = 2'b10;  // weight and bias store

  // Control register offsets inside HA_CTRL.
  localparam logic [7:0] REG_CTRL    = 8'h00;  // w: bit0 start, bit1 clamp visible, bit2 stop, bit3 snapshot
  localparam logic [7:0] REG_NSWEEP  = 8'h01;  // rw: sweeps per run, 0 = run until stop
  localparam logic [7:0] REG_STATUS  = 8'h02;  // r: bit0 busy, bit1 done (sticky until next start)
  localparam logic [7:0] REG_SWEEPS  = 8'h03;  // r: sweeps completed in the current/last run
  localparam logic [7:0] REG_HALO_N  = 8'h04;  // r: boundary frames accepted from the north link
  localparam logic [7:0] REG_HALO_S  = 8'h05;  // r: boundary frames accepted from the south link

  // Number of neighbours within Euclidean radius k on the square lattice.
  function automatic int num_nbrs(input int k);
    int n = 0;
    for (int dr = -k; dr <= k; dr++)
      for (int dc = -k; dc <= k; dc++)
        if (dr * dr + dc * dc <= k * k) n++;
    return n;
  endfunction

  // Row offset (sel = 0) or column offset (sel = 1) of neighbour idx.
  function automatic int nbr_off(input int k, input int idx, input int sel);
    int n = 0;
    for (int dr = -k; dr <= k; dr++)
      for (int dc = -k; dc <= k; dc++)
        if (dr * dr + dc * dc <= k * k) begin
          if (n == idx) return (sel == 0) ? dr : dc;
          n++;
        end
    return 0;
  endfunction

  // Seed for generator number idx, derived from a base with the splitmix64
  // finaliser so that neighbouring generators start far apart. Never zero.
  function automatic logic [127:0] seed_for(input logic [63:0] base, input int idx);
    logic [63:0] z;
    logic [127:0] s;
    for (int h = 0; h < 2; h++) begin
      z = base + 64'h9E3779B97F4A7C15 * (64'(2 * idx + 1) + 64'(h));
      z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
      z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
      z = z ^ (z >> 31);
      s[64*h +: 64] = z;
    end
    if (s == '0) s = 128'h1;
    return s;
  endfunction

endpackage
