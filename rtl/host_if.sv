// host_if: command port through which the host loads parameters, runs the
// sampler and reads back samples.
//
// The host link itself (Ethernet on the boards) is outside this design; what
// it delivers is modelled as a simple word-addressed bus: a write strobe with
// address and data, and a read strobe whose data returns one clock later with
// host_rvalid_o. Address bits [31:30] select the region:
//   2'b00 control: REG_CTRL (write: bit0 start, bit1 clamp the visible layer,
//         bit2 stop, bit3 take a snapshot now), REG_NSWEEP, REG_STATUS
//         (bit0 busy, bit1 done since the last start), REG_SWEEPS,
//         REG_HALO_N / REG_HALO_S (boundary frames received);
//   2'b01 state snapshot, word w = p-bits [32w+31 : 32w] of the packed state
//         [layer][row][column];
//   2'b10 weights: [29:28] layer, [27:8] site (row * L + column inside the
//         partition), [7:0] slot (see weight_bank), data [9:0].
// The snapshot register is the sample buffer: it is loaded with the complete
// p-bit state at the end of every run (and on the snapshot command), so the
// host reads a consistent sample while the array is already sampling again.
// The address map and the bus are this design's choices.
module host_if
  import pc_pkg::*;
#(
  parameter int unsigned NSTATE    = 64,
  parameter int unsigned SITE_BITS = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host side
  input  logic                 host_we_i,
  input  logic                 host_re_i,
  input  logic [31:0]          host_addr_i,
  input  logic [31:0]          host_wdata_i,
  output logic [31:0]          host_rdata_o,
  output logic                 host_rvalid_o,
  // sweep controller
  output logic                 start_o,
  output logic                 stop_o,
  output logic                 clamp_o,
  output logic [31:0]          n_sweeps_o,
  input  logic                 busy_i,
  input  logic                 done_i,
  input  logic [31:0]          sweeps_i,
  input  logic [31:0]          halo_n_frames_i,
  input  logic [31:0]          halo_s_frames_i,
  // weight store
  output logic                 wr_en_o,
  output logic [1:0]           wr_layer_o,
  output logic [SITE_BITS-1:0] wr_site_o,
  output logic [7:0]           wr_slot_o,
  output logic [W_BITS-1:0]    wr_data_o,
  // p-bit states
  input  logic [NSTATE-1:0]    state_i
);
  localparam int unsigned NWORDS = (NSTATE + 31) / 32;

  logic [NWORDS*32-1:0] snap;
  logic                 done_seen;
  logic [1:0]           region;
  logic [7:0]           reg_a;

  assign region = host_addr_i[31:30];
  assign reg_a  = host_addr_i[7:0];

  // Weight writes go straight through, registered once.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en_o    <= 1'b0;
      wr_layer_o <= '0;
      wr_site_o  <= '0;
      wr_slot_o  <= '0;
      wr_data_o  <= '0;
    end else begin
      wr_en_o    <= host_we_i && region == HA_WEIGHT;
      wr_layer_o <= host_addr_i[29:28];
      wr_site_o  <= SITE_BITS'(host_addr_i[27:8]);
      wr_slot_o  <= host_addr_i[7:0];
      wr_data_o  <= host_wdata_i[W_BITS-1:0];
    end
  end

  // Control registers and snapshot.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_o    <= 1'b0;
      stop_o     <= 1'b0;
      clamp_o    <= 1'b0;
      n_sweeps_o <= 32'd1;
      done_seen  <= 1'b0;
      snap       <= '0;
    end else begin
      start_o <= 1'b0;
      stop_o  <= 1'b0;
      if (host_we_i && region == HA_CTRL) begin
        case (reg_a)
          REG_CTRL: begin
            start_o <= host_wdata_i[0];
            clamp_o <= host_wdata_i[1];
            stop_o  <= host_wdata_i[2];
            if (host_wdata_i[3]) snap <= (NWORDS * 32)'(state_i);
          end
          REG_NSWEEP: n_sweeps_o <= host_wdata_i;
          default: ;
        endcase
      end
      if (start_o)     done_seen <= 1'b0;
      else if (done_i) done_seen <= 1'b1;
      if (done_i)      snap <= (NWORDS * 32)'(state_i);
    end
  end

  // Reads: one clock of latency.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rdata_o  <= '0;
      host_rvalid_o <= 1'b0;
    end else begin
      host_rvalid_o <= host_re_i;
      host_rdata_o  <= '0;
      if (host_re_i) begin
        if (region == HA_STATE) begin
          if (host_addr_i[19:0] < 20'(NWORDS)) host_rdata_o <= snap[host_addr_i[19:0]*32 +: 32];
        end else if (region == HA_CTRL) begin
          case (reg_a)
            REG_NSWEEP: host_rdata_o <= n_sweeps_o;
            REG_STATUS: host_rdata_o <= {30'd0, done_seen, busy_i};
            REG_SWEEPS: host_rdata_o <= sweeps_i;
            REG_HALO_N: host_rdata_o <= halo_n_frames_i;
            REG_HALO_S: host_rdata_o <= halo_s_frames_i;
            default:    host_rdata_o <= '0;
          endcase
        end
      end
    end
  end
endmodule
