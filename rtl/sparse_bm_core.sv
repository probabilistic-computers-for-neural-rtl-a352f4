// sparse_bm_core: the p-bit array of one FPGA -- every unit of a stripe of
// ROWS consecutive rows (first row ROW0) of an L x L periodic lattice, in NLAYERS layers
// (2 = visible + hidden, the FRBM; 3 = visible + hidden + deep, the DBM).
//
// Unit (l, r, c) couples to the units (l-1, r+dr, c+dc) and (l+1, r+dr, c+dc)
// of the adjacent layers for every offset within Euclidean radius K on the
// torus (pc_pkg::nbr_off), so a layer-to-layer coupling matrix is a local,
// sparse, translation-structured graph with DEG = 13 neighbours for K = 2.
// Each unit is a synapse (adder tree over its neighbours plus bias) feeding a
// pbit_neuron; weights come from one weight_bank per layer and random numbers
// from one rng_bank per layer.
//
// The partition boundary. Units within K rows of the partition edge have
// neighbours that live on another FPGA. Their states arrive as halos:
// halo_n_i holds, for every layer, the K rows just above ROW0 (row ROW0-K
// first) and halo_s_i the K rows just below ROW0+ROWS-1, both modulo L. The
// halo bits are simply held values, refreshed whenever the boundary link
// delivers a new frame; local units read them exactly like local states.
// When ROWS == L the partition is the whole torus and the halos are ignored:
// the wrap-around rows are taken from the array itself. A row partition
// (a stripe of whole lattice rows per FPGA) stands in for the min-cut graph
// partition used to map the lattice onto the cluster.
//
// Update rule. On a clock with color_en_i[l % 2] high, every unit of layer l
// draws its new state from its current field; clamp_i freezes layer 0 (the
// visible spins) so that only the auxiliary layers are resampled. state_o is
// the register state of all units, packed [layer][row][column].
module sparse_bm_core
  import pc_pkg::*;
#(
  parameter int unsigned L         = 8,
  parameter int unsigned ROWS      = 8,
  parameter int unsigned NLAYERS   = 2,
  parameter int unsigned K         = 2,
  parameter int unsigned FRAC_BITS = 3,
  parameter logic [63:0] SEED      = 64'h5EED_0000_0000_0001,
  parameter int unsigned NSITES    = ROWS * L,
  parameter int unsigned SITE_BITS = (NSITES > 1) ? $clog2(NSITES) : 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic [1:0]                             color_en_i,
  input  logic                                   clamp_i,
  // weight / bias write port
  input  logic                                   wr_en_i,
  input  logic [1:0]                             wr_layer_i,
  input  logic [SITE_BITS-1:0]                   wr_site_i,
  input  logic [7:0]                             wr_slot_i,
  input  logic [W_BITS-1:0]                      wr_data_i,
  // boundary states received from the neighbouring FPGAs
  input  logic [NLAYERS-1:0][K-1:0][L-1:0]       halo_n_i,
  input  logic [NLAYERS-1:0][K-1:0][L-1:0]       halo_s_i,
  output logic [NLAYERS-1:0][ROWS-1:0][L-1:0]    state_o
);
  localparam int unsigned DEG = num_nbrs(K);
  localparam int unsigned ER  = ROWS + 2 * K;   // rows of the extended view

  // Extended view of every layer: K halo rows, the local rows, K halo rows.
  logic [NLAYERS-1:0][ER-1:0][L-1:0] ext;

  always_comb begin
    for (int l = 0; l < int'(NLAYERS); l++) begin
      for (int r = 0; r < int'(ROWS); r++) ext[l][K + r] = state_o[l][r];
      for (int k = 0; k < int'(K); k++) begin
        if (ROWS == L) begin
          ext[l][k]            = state_o[l][(ROWS - K + k) % ROWS];
          ext[l][K + ROWS + k] = state_o[l][k % ROWS];
        end else begin
          ext[l][k]            = halo_n_i[l][k];
          ext[l][K + ROWS + k] = halo_s_i[l][k];
        end
      end
    end
  end

  for (genvar l = 0; l < NLAYERS; l++) begin : g_layer
    localparam bit HAS_LO = (l > 0);
    localparam bit HAS_HI = (l < NLAYERS - 1);
    localparam int unsigned NSLOT = DEG * (int'(HAS_LO) + int'(HAS_HI));
    localparam int unsigned SUM_BITS = W_BITS + $clog2(NSLOT + 1);

    logic [NSITES-1:0][NSLOT-1:0][W_BITS-1:0] w;
    logic [NSITES-1:0][W_BITS-1:0]            b;
    logic [NSITES*RND_BITS-1:0]               rnd;
    logic                                     upd;

    assign upd = color_en_i[l % 2] && !(clamp_i && l == 0);

    weight_bank #(
      .NSITES(NSITES), .DEG(DEG), .HAS_LO(HAS_LO), .HAS_HI(HAS_HI), .SITE_BITS(SITE_BITS)
    ) u_wb (
      .clk      (clk),
      .rst_n    (rst_n),
      .wr_en_i  (wr_en_i && wr_layer_i == 2'(l)),
      .wr_site_i(wr_site_i),
      .wr_slot_i(wr_slot_i),
      .wr_data_i(wr_data_i),
      .w_o      (w),
      .b_o      (b)
    );

    rng_bank #(.N_OUT(NSITES), .RW(RND_BITS), .SEED_BASE(SEED + 64'(l) * 64'h1_0000_0001)) u_rng (
      .clk  (clk),
      .rst_n(rst_n),
      .en_i (upd),
      .rnd_o(rnd)
    );

    for (genvar i = 0; i < NSITES; i++) begin : g_site
      localparam int unsigned R = i / L;
      localparam int unsigned C = i % L;
      logic [NSLOT-1:0]          nb;
      logic signed [SUM_BITS-1:0] field;

      for (genvar s = 0; s < DEG; s++) begin : g_nb
        localparam int DR = nbr_off(K, s, 0);
        localparam int DC = nbr_off(K, s, 1);
        localparam int unsigned XR = R + K + DR;
        localparam int unsigned XC = (C + L + DC) % L;
        if (HAS_LO) begin : g_lo
          assign nb[s] = ext[l-1][XR][XC];
        end
        if (HAS_HI) begin : g_hi
          assign nb[(HAS_LO ? DEG : 0) + s] = ext[l+1][XR][XC];
        end
      end

      synapse #(.DEG(NSLOT), .SUM_BITS(SUM_BITS)) u_syn (
        .w_i    (w[i]),
        .s_i    (nb),
        .bias_i (b[i]),
        .field_o(field)
      );

      pbit_neuron #(.IN_BITS(SUM_BITS), .FRAC_BITS(FRAC_BITS), .RW(RND_BITS)) u_pbit (
        .clk    (clk),
        .rst_n  (rst_n),
        .en_i   (upd),
        .field_i(field),
        .rnd_i  (rnd[i*RND_BITS +: RND_BITS]),
        .state_o(state_o[l][R][C])
      );
    end
  end
endmodule
