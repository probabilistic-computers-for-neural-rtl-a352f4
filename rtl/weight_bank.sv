// weight_bank: coupling weights and biases of one layer of one FPGA's
// partition, written by the host and read by all synapses at once.
//
// Every site of the layer owns DEG weights towards the layer below (if
// HAS_LO), DEG weights towards the layer above (if HAS_HI) and one bias. The
// weights towards p-bits that live on a neighbouring FPGA are the "shadow
// weights": they sit in the same slots as the local ones, so a coupling that
// crosses the partition cut is stored on both FPGAs, and a symmetric coupling
// W_ij inside a partition is stored at both of its ends. The host writes both
// copies; keeping one copy per endpoint, so that every p-bit's synapse reads
// only its own registers, is this design's choice.
//
// Write port (one word per clock): wr_slot_i in [0, DEG) addresses the
// coupling to lower-layer neighbour wr_slot_i, [DEG, 2*DEG) the coupling to
// upper-layer neighbour wr_slot_i - DEG, and 2*DEG the bias; writes to slots
// the layer does not have, or to sites beyond NSITES, are ignored. The
// written value appears on w_o / b_o at the next clock. Reset clears all
// words, so an unloaded machine samples uniformly.
module weight_bank
  import pc_pkg::*;
#(
  parameter int unsigned NSITES    = 64,
  parameter int unsigned DEG       = 13,
  parameter bit          HAS_LO    = 1'b1,
  parameter bit          HAS_HI    = 1'b0,
  parameter int unsigned SITE_BITS = (NSITES > 1) ? $clog2(NSITES) : 1,
  parameter int unsigned NSLOT     = DEG * (int'(HAS_LO) + int'(HAS_HI))
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 wr_en_i,
  input  logic [SITE_BITS-1:0]                 wr_site_i,
  input  logic [7:0]                           wr_slot_i,
  input  logic [W_BITS-1:0]                    wr_data_i,
  output logic [NSITES-1:0][NSLOT-1:0][W_BITS-1:0] w_o,
  output logic [NSITES-1:0][W_BITS-1:0]        b_o
);
  logic       is_bias, is_w;
  logic [7:0] bslot;

  always_comb begin
    is_bias = (wr_slot_i == 8'(2 * DEG));
    is_w    = 1'b0;
    bslot   = '0;
    if (HAS_LO && wr_slot_i < 8'(DEG)) begin
      is_w  = 1'b1;
      bslot = wr_slot_i;
    end else if (HAS_HI && wr_slot_i >= 8'(DEG) && wr_slot_i < 8'(2 * DEG)) begin
      is_w  = 1'b1;
      bslot = wr_slot_i - 8'(DEG) + (HAS_LO ? 8'(DEG) : 8'd0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NSITES); i++) begin
        w_o[i] <= '0;
        b_o[i] <= '0;
      end
    end else if (wr_en_i && 32'(wr_site_i) < NSITES) begin
      if (is_bias)   b_o[wr_site_i]        <= wr_data_i;
      else if (is_w) w_o[wr_site_i][bslot] <= wr_data_i;
    end
  end
endmodule
