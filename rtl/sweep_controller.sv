// sweep_controller: graph-coloured Gibbs sweep scheduler of one FPGA.
//
// The sparse Boltzmann machine is bipartite between adjacent layers, so two
// colours suffice: colour 0 holds the even layers (visible, and the deep layer
// of a DBM) and colour 1 the odd layer (hidden). No two p-bits of one colour
// are coupled, so every p-bit of a colour updates in parallel in one clock
// and a full sweep takes NCOLORS clocks whatever the system size.
//
// A run starts on start_i, samples clamp_i (hold the visible layer fixed, the
// inner loop of dual sampling) and n_sweeps_i (0 = run until stop_i), and then
// raises color_en_o[c] in phase c of every sweep. It ends after n_sweeps_i
// sweeps, or at once on stop_i, with a one-clock done_o pulse. sweeps_o counts
// the completed sweeps of the current or last run. start_i while busy is
// ignored. Timing: color_en_o[0] is high in the clock after start_i; a run of
// n sweeps keeps busy_o high for exactly n * NCOLORS clocks.
module sweep_controller #(
  parameter int unsigned NCOLORS = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start_i,
  input  logic               stop_i,
  input  logic               clamp_i,
  input  logic [31:0]        n_sweeps_i,
  output logic [NCOLORS-1:0] color_en_o,
  output logic               clamp_o,
  output logic               busy_o,
  output logic               done_o,
  output logic [31:0]        sweeps_o
);
  typedef enum logic {S_IDLE, S_RUN} state_e;

  state_e      state;
  logic [(NCOLORS > 1 ? $clog2(NCOLORS) : 1)-1:0] phase;
  logic [31:0] target;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      phase    <= '0;
      target   <= '0;
      clamp_o  <= 1'b0;
      done_o   <= 1'b0;
      sweeps_o <= '0;
    end else begin
      done_o <= 1'b0;
      case (state)
        S_IDLE: if (start_i) begin
          state    <= S_RUN;
          phase    <= '0;
          target   <= n_sweeps_i;
          clamp_o  <= clamp_i;
          sweeps_o <= '0;
        end
        S_RUN: begin
          if (stop_i) begin
            state  <= S_IDLE;
            done_o <= 1'b1;
          end else if (32'(phase) == NCOLORS - 1) begin
            phase    <= '0;
            sweeps_o <= sweeps_o + 1;
            if (target != 0 && sweeps_o + 1 == target) begin
              state  <= S_IDLE;
              done_o <= 1'b1;
            end
          end else begin
            phase <= phase + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    color_en_o = '0;
    if (state == S_RUN && !stop_i) color_en_o[phase] = 1'b1;
  end
  assign busy_o = (state == S_RUN);

  // Exactly one colour updates at a time: p-bits of different colours are
  // coupled and must never sample together.
  a_one_colour: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(color_en_o));
endmodule
