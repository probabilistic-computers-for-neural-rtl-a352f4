// boundary_tx: transmit side of a source-synchronous boundary link between two
// FPGAs of the cluster.
//
// The link carries only binary boundary p-bit states (never weights, which
// are duplicated on both boards). The HB boundary bits are sent as a frame of
// NW = ceil(HB / LANES) words on LANES parallel data lines, together with the
// transmitting FPGA's clock, forwarded on its own line, and a frame line that
// is high with the first word of every frame. The frame is a snapshot taken
// at the first word, so the receiver always gets a set of states that existed
// together on the source. While en_i is high frames follow each other back to
// back, one word per clock; a frame in progress when en_i falls is
// completed, so the link never stops in mid-frame. There is no handshake and no acknowledgement:
// the receiver takes whatever arrives, and the link runs asynchronously to
// the receiving FPGA's p-bit clock.
//
// Timing: data and frame change on the rising edge of clk; tx_clk_o is clk
// itself, so the receiver captures on the falling edge, half a period after
// launch. The serial word format (lane 0 = lowest bit of a word, word 0 = bits
// [LANES-1:0]), the frame line and the lane count are this design's choices.
module boundary_tx #(
  parameter int unsigned HB    = 320,
  parameter int unsigned LANES = 8,
  parameter int unsigned NW    = (HB + LANES - 1) / LANES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en_i,
  input  logic [HB-1:0]     bits_i,
  output logic              tx_clk_o,
  output logic [LANES-1:0]  tx_data_o,
  output logic              tx_frame_o
);
  logic [NW*LANES-1:0]        snap;
  logic [$clog2(NW+1)-1:0]    wcnt;
  logic [NW*LANES-1:0]        padded;

  assign padded   = (NW * LANES)'(bits_i);
  assign tx_clk_o = clk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      snap       <= '0;
      wcnt       <= '0;
      tx_data_o  <= '0;
      tx_frame_o <= 1'b0;
    end else if (wcnt == 0 && !en_i) begin
      tx_frame_o <= 1'b0;
    end else if (wcnt == 0) begin
      snap       <= padded;
      tx_data_o  <= padded[LANES-1:0];
      tx_frame_o <= 1'b1;
      wcnt       <= (NW > 1) ? 1 : 0;
    end else begin
      tx_data_o  <= snap[wcnt*LANES +: LANES];
      tx_frame_o <= 1'b0;
      wcnt       <= (32'(wcnt) == NW - 1) ? '0 : wcnt + 1'b1;
    end
  end
endmodule
