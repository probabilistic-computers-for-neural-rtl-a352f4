// pcomputer_cluster: the multi-FPGA probabilistic computer -- NFPGA nodes,
// each sampling a stripe of rows of an L x L periodic lattice, chained by
// full-duplex boundary links.
//
// Node n holds rows [n*L/NFPGA, (n+1)*L/NFPGA); with the defaults (L = 80,
// six nodes, FRBM with two layers) that is 13 or 14 rows, i.e. 2080 or 2240
// p-bits per FPGA. Every node sends its northern edge rows north and its
// southern edge rows south; what a node receives becomes its halo. The
// forward direction of the chain carries southern edges, the reverse
// direction northern edges. Each node runs on its own clock and reset, and
// the links forward the sender's clock, so nothing in the cluster is globally
// synchronous: p-bits always update with the latest boundary states that
// have arrived.
//
// Because a row stripe partition of a torus is itself a ring, the last node
// and the first node are joined by one more link pair, which carries the
// periodic wrap of the lattice; in a chain of boards that link closes the
// ring. Every node keeps its own host command port; the host link is
// outside this design.
module pcomputer_cluster
  import pc_pkg::*;
#(
  parameter int unsigned NFPGA     = 6,
  parameter int unsigned L         = 80,
  parameter int unsigned NLAYERS   = 2,
  parameter int unsigned K         = 2,
  parameter int unsigned FRAC_BITS = 3,
  parameter int unsigned LANES     = 8
) (
  input  logic [NFPGA-1:0]        clk,
  input  logic [NFPGA-1:0]        rst_n,
  input  logic [NFPGA-1:0]        host_we_i,
  input  logic [NFPGA-1:0]        host_re_i,
  input  logic [NFPGA-1:0][31:0]  host_addr_i,
  input  logic [NFPGA-1:0][31:0]  host_wdata_i,
  output logic [NFPGA-1:0][31:0]  host_rdata_o,
  output logic [NFPGA-1:0]        host_rvalid_o
);
  // Link wires, indexed by the sending node.
  logic [NFPGA-1:0]             n_clk, s_clk, n_frame, s_frame;
  logic [NFPGA-1:0][LANES-1:0]  n_data, s_data;

  for (genvar n = 0; n < NFPGA; n++) begin : g_node
    localparam int unsigned ROW0  = n * L / NFPGA;
    localparam int unsigned ROWS  = (n + 1) * L / NFPGA - ROW0;
    localparam int unsigned NORTH = (n + NFPGA - 1) % NFPGA;
    localparam int unsigned SOUTH = (n + 1) % NFPGA;

    pcomputer_node #(
      .L(L), .ROWS(ROWS), .NLAYERS(NLAYERS), .K(K), .FRAC_BITS(FRAC_BITS), .LANES(LANES),
      .SEED(64'h5EED_0000_0000_0001 + 64'(n) * 64'h0000_0100_0000_0000)
    ) u_node (
      .clk          (clk[n]),
      .rst_n        (rst_n[n]),
      .host_we_i    (host_we_i[n]),
      .host_re_i    (host_re_i[n]),
      .host_addr_i  (host_addr_i[n]),
      .host_wdata_i (host_wdata_i[n]),
      .host_rdata_o (host_rdata_o[n]),
      .host_rvalid_o(host_rvalid_o[n]),
      .n_tx_clk_o   (n_clk[n]),
      .n_tx_data_o  (n_data[n]),
      .n_tx_frame_o (n_frame[n]),
      .n_rx_clk_i   (s_clk[NORTH]),
      .n_rx_data_i  (s_data[NORTH]),
      .n_rx_frame_i (s_frame[NORTH]),
      .s_tx_clk_o   (s_clk[n]),
      .s_tx_data_o  (s_data[n]),
      .s_tx_frame_o (s_frame[n]),
      .s_rx_clk_i   (n_clk[SOUTH]),
      .s_rx_data_i  (n_data[SOUTH]),
      .s_rx_frame_i (n_frame[SOUTH])
    );
  end
endmodule
