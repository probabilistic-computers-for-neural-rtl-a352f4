// boundary_rx: receive side of a source-synchronous boundary link.
//
// Capture domain (forwarded clock rx_clk_i): words are taken on the falling
// edge, in the middle of the data eye of a transmitter that launches on its
// rising edge. A high rx_frame_i marks word 0 and always restarts assembly,
// so the receiver locks onto the stream by itself and recovers from any
// slip. When word NW-1 arrives the complete frame is copied into a holding
// register and a toggle flag flips.
//
// Local domain (clk): the toggle passes a two-flip-flop synchroniser; on each
// change the holding register, which then stays still for at least NW
// forwarded-clock periods, is copied into halo_o. halo_o is therefore the
// latest complete boundary frame, held constant between link updates, which
// is how the local p-bits see their off-chip neighbours. upd_o pulses for one
// clk when halo_o changes and frames_o counts those updates.
//
// The forwarded clock is used only to capture the stream; nothing else on
// the receiving FPGA runs on it. The toggle-synchroniser crossing, the
// falling-edge capture and the frame line are this design's choices; the
// crossing is safe while NW forwarded-clock periods exceed three local clock
// periods.
module boundary_rx #(
  parameter int unsigned HB    = 320,
  parameter int unsigned LANES = 8,
  parameter int unsigned NW    = (HB + LANES - 1) / LANES
) (
  // link side
  input  logic              rx_clk_i,
  input  logic [LANES-1:0]  rx_data_i,
  input  logic              rx_frame_i,
  // local side
  input  logic              clk,
  input  logic              rst_n,
  output logic [HB-1:0]     halo_o,
  output logic              upd_o,
  output logic [31:0]       frames_o
);
  logic [NW-1:0][LANES-1:0] asm_q;
  logic [NW-1:0][LANES-1:0] hold_q;
  logic [$clog2(NW+1)-1:0]  wcnt;
  logic                     active;
  logic                     tog;
  logic [2:0]               tog_sync;

  // ---- capture domain ----
  always_ff @(negedge rx_clk_i or negedge rst_n) begin
    if (!rst_n) begin
      asm_q  <= '0;
      hold_q <= '0;
      wcnt   <= '0;
      active <= 1'b0;
      tog    <= 1'b0;
    end else begin
      logic [$clog2(NW+1)-1:0] idx;
      logic                    take;
      take = 1'b0;
      idx  = '0;
      if (rx_frame_i) begin
        take = 1'b1;
        idx  = '0;
      end else if (active) begin
        take = 1'b1;
        idx  = wcnt;
      end
      if (take) begin
        asm_q[idx] <= rx_data_i;
        if (32'(idx) == NW - 1) begin
          for (int w = 0; w < int'(NW) - 1; w++) hold_q[w] <= asm_q[w];
          hold_q[NW-1] <= rx_data_i;
          tog    <= ~tog;
          active <= 1'b0;
          wcnt   <= '0;
        end else begin
          active <= 1'b1;
          wcnt   <= idx + 1'b1;
        end
      end
    end
  end

  // ---- local domain ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tog_sync <= '0;
      halo_o   <= '0;
      upd_o    <= 1'b0;
      frames_o <= '0;
    end else begin
      tog_sync <= {tog_sync[1:0], tog};
      upd_o    <= 1'b0;
      if (tog_sync[2] ^ tog_sync[1]) begin
        halo_o   <= HB'(hold_q);
        upd_o    <= 1'b1;
        frames_o <= frames_o + 1;
      end
    end
  end
endmodule
