// synapse: local field of one p-bit, I = b + sum_j W_j * s_j.
//
// The neighbour states s_j are single bits (1 = +1, 0 = -1), so every product
// is the weight or its negation and the whole synapse is one adder tree with
// no multiplier. Weights and bias are W_BITS-bit two's-complement numbers in
// the machine's fixed-point format; the sum is carried at full width
// (W_BITS + clog2(DEG+1) bits), so it never overflows, and the p-bit neuron
// saturates it when it looks up tanh. The field is purely combinational:
// it settles in the same clock in which the neighbour states are presented.
// Keeping the sum at full width rather than rounding it back to 10 bits is
// this design's choice.
module synapse
  import pc_pkg::*;
#(
  parameter int unsigned DEG      = 13,
  parameter int unsigned SUM_BITS = W_BITS + $clog2(DEG + 1)
) (
  input  logic [DEG-1:0][W_BITS-1:0] w_i,     // coupling to neighbour j
  input  logic [DEG-1:0]             s_i,     // neighbour states, 1 = +1
  input  logic [W_BITS-1:0]          bias_i,
  output logic signed [SUM_BITS-1:0] field_o
);
  always_comb begin
    logic signed [SUM_BITS-1:0] acc;
    acc = SUM_BITS'($signed(bias_i));
    for (int j = 0; j < DEG; j++) begin
      if (s_i[j]) acc = acc + SUM_BITS'($signed(w_i[j]));
      else        acc = acc - SUM_BITS'($signed(w_i[j]));
    end
    field_o = acc;
  end
endmodule
