// pcomputer_node: one FPGA of the probabilistic computer.
//
// The node samples its share of a sparse Boltzmann machine -- a stripe of
// ROWS lattice rows in every layer -- with all p-bits of one colour updating
// in parallel each clock. It holds the weights of its own couplings and the
// shadow copies of couplings that cross to its neighbours, and exchanges
// only binary boundary states with them: its first K rows of every layer go
// north and its last K rows go south, each over a source-synchronous link,
// and the rows it receives are held as halos until the next frame arrives.
// The p-bits never wait for the links; boundary values may be a few frames
// old, which is the asynchronous exchange that lets each FPGA run its own
// p-bit clock.
//
// With ROWS == L the node is a complete single-FPGA sampler and the link
// ports are unused (the defaults: the 35 x 35 FRBM, 2450 p-bits, s6.3
// weights). Three layers and FRAC_BITS = 5 give the deep Boltzmann machine
// configuration with s4.5 weights.
//
// Host port: see host_if. Link ports: *_tx_* are outputs towards the
// neighbour, *_rx_* inputs from it, each with a forwarded clock, LANES data
// lines and a frame line.
module pcomputer_node
  import pc_pkg::*;
#(
  parameter int unsigned L         = 35,
  parameter int unsigned ROWS      = 35,
  parameter int unsigned NLAYERS   = 2,
  parameter int unsigned K         = 2,
  parameter int unsigned FRAC_BITS = 3,
  parameter int unsigned LANES     = 8,
  parameter logic [63:0] SEED      = 64'h5EED_0000_0000_0001,
  parameter int unsigned HB        = NLAYERS * K * L,
  parameter int unsigned NSTATE    = NLAYERS * ROWS * L
) (
  input  logic              clk,
  input  logic              rst_n,
  // host command port
  input  logic              host_we_i,
  input  logic              host_re_i,
  input  logic [31:0]       host_addr_i,
  input  logic [31:0]       host_wdata_i,
  output logic [31:0]       host_rdata_o,
  output logic              host_rvalid_o,
  // link to the northern neighbour
  output logic              n_tx_clk_o,
  output logic [LANES-1:0]  n_tx_data_o,
  output logic              n_tx_frame_o,
  input  logic              n_rx_clk_i,
  input  logic [LANES-1:0]  n_rx_data_i,
  input  logic              n_rx_frame_i,
  // link to the southern neighbour
  output logic              s_tx_clk_o,
  output logic [LANES-1:0]  s_tx_data_o,
  output logic              s_tx_frame_o,
  input  logic              s_rx_clk_i,
  input  logic [LANES-1:0]  s_rx_data_i,
  input  logic              s_rx_frame_i
);
  localparam int unsigned NSITES    = ROWS * L;
  localparam int unsigned SITE_BITS = (NSITES > 1) ? $clog2(NSITES) : 1;

  logic [NLAYERS-1:0][ROWS-1:0][L-1:0] state;
  logic [NLAYERS-1:0][K-1:0][L-1:0]    halo_n, halo_s, edge_n, edge_s;
  logic [1:0]                          color_en;
  logic                                start, stop, clamp_req, clamp, busy, done;
  logic [31:0]                         n_sweeps, sweeps, frames_n, frames_s;
  logic                                wr_en;
  logic [1:0]                          wr_layer;
  logic [SITE_BITS-1:0]                wr_site;
  logic [7:0]                          wr_slot;
  logic [W_BITS-1:0]                   wr_data;

  always_comb begin
    for (int l = 0; l < int'(NLAYERS); l++)
      for (int k = 0; k < int'(K); k++) begin
        edge_n[l][k] = state[l][k];
        edge_s[l][k] = state[l][ROWS - K + k];
      end
  end

  host_if #(.NSTATE(NSTATE), .SITE_BITS(SITE_BITS)) u_host (
    .clk            (clk),
    .rst_n          (rst_n),
    .host_we_i      (host_we_i),
    .host_re_i      (host_re_i),
    .host_addr_i    (host_addr_i),
    .host_wdata_i   (host_wdata_i),
    .host_rdata_o   (host_rdata_o),
    .host_rvalid_o  (host_rvalid_o),
    .start_o        (start),
    .stop_o         (stop),
    .clamp_o        (clamp_req),
    .n_sweeps_o     (n_sweeps),
    .busy_i         (busy),
    .done_i         (done),
    .sweeps_i       (sweeps),
    .halo_n_frames_i(frames_n),
    .halo_s_frames_i(frames_s),
    .wr_en_o        (wr_en),
    .wr_layer_o     (wr_layer),
    .wr_site_o      (wr_site),
    .wr_slot_o      (wr_slot),
    .wr_data_o      (wr_data),
    .state_i        (state)
  );

  sweep_controller #(.NCOLORS(2)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start_i   (start),
    .stop_i    (stop),
    .clamp_i   (clamp_req),
    .n_sweeps_i(n_sweeps),
    .color_en_o(color_en),
    .clamp_o   (clamp),
    .busy_o    (busy),
    .done_o    (done),
    .sweeps_o  (sweeps)
  );

  sparse_bm_core #(
    .L(L), .ROWS(ROWS), .NLAYERS(NLAYERS), .K(K), .FRAC_BITS(FRAC_BITS), .SEED(SEED)
  ) u_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .color_en_i(color_en),
    .clamp_i   (clamp),
    .wr_en_i   (wr_en),
    .wr_layer_i(wr_layer),
    .wr_site_i (wr_site),
    .wr_slot_i (wr_slot),
    .wr_data_i (wr_data),
    .halo_n_i  (halo_n),
    .halo_s_i  (halo_s),
    .state_o   (state)
  );

  boundary_tx #(.HB(HB), .LANES(LANES)) u_tx_n (
    .clk(clk), .rst_n(rst_n), .en_i(1'b1), .bits_i(edge_n),
    .tx_clk_o(n_tx_clk_o), .tx_data_o(n_tx_data_o), .tx_frame_o(n_tx_frame_o)
  );
  boundary_tx #(.HB(HB), .LANES(LANES)) u_tx_s (
    .clk(clk), .rst_n(rst_n), .en_i(1'b1), .bits_i(edge_s),
    .tx_clk_o(s_tx_clk_o), .tx_data_o(s_tx_data_o), .tx_frame_o(s_tx_frame_o)
  );
  boundary_rx #(.HB(HB), .LANES(LANES)) u_rx_n (
    .rx_clk_i(n_rx_clk_i), .rx_data_i(n_rx_data_i), .rx_frame_i(n_rx_frame_i),
    .clk(clk), .rst_n(rst_n), .halo_o(halo_n), .upd_o(), .frames_o(frames_n)
  );
  boundary_rx #(.HB(HB), .LANES(LANES)) u_rx_s (
    .rx_clk_i(s_rx_clk_i), .rx_data_i(s_rx_data_i), .rx_frame_i(s_rx_frame_i),
    .clk(clk), .rst_n(rst_n), .halo_o(halo_s), .upd_o(), .frames_o(frames_s)
  );
endmodule
