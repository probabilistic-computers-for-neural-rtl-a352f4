// pbit_neuron: the stochastic binary neuron of a p-computer,
//   s = sgn(tanh(I) - r),  r uniform on [-1, 1).
//
// The local field I arrives from the synapse as a fixed-point number with
// FRAC_BITS fraction bits. It is saturated to [-8, 8), where tanh is within
// 3e-7 of +-1, and the saturated value indexes a lookup table holding
// round(tanh(x) * 2^(RW-1)), an RW+1-bit signed number in
// [-2^(RW-1), 2^(RW-1)]. The random number r is an RW-bit two's-complement
// value, and the neuron takes the state +1 when r < T. Hence
// P(s = +1) = (1 + tanh(I)) / 2 up to the 2^-RW quantisation, which is the
// Gibbs conditional of a unit with field I at unit inverse temperature; the
// fields at the two ends of the table give T = +-2^(RW-1), i.e. a
// deterministic +1 or -1.
//
// The table is computed at elaboration from $tanh; it has 16 * 2^FRAC_BITS
// entries (128 for s6.3). The inverse temperature beta of the p-bit equation
// is fixed at 1 (the trained weights already carry it); that, the clipping
// range and the random number width are this design's choices.
//
// Timing: on a clock edge with en_i high the state register takes the new
// sample; otherwise it holds. Reset sets the state to INIT.
module pbit_neuron
  import pc_pkg::*;
#(
  parameter int unsigned IN_BITS   = 14,
  parameter int unsigned FRAC_BITS = 3,
  parameter int unsigned RW        = RND_BITS,
  parameter bit          INIT      = 1'b0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en_i,
  input  logic signed [IN_BITS-1:0] field_i,
  input  logic [RW-1:0]             rnd_i,
  output logic                      state_o
);
  localparam int unsigned IDX_BITS = FRAC_BITS + 4;       // covers [-8, 8)
  localparam int unsigned LUT_N    = 1 << IDX_BITS;
  localparam logic signed [IN_BITS-1:0] FMAX = IN_BITS'((LUT_N / 2) - 1);
  localparam logic signed [IN_BITS-1:0] FMIN = -IN_BITS'(LUT_N / 2);

  typedef logic signed [RW:0] lut_t [LUT_N];

  // Entry i holds tanh of the field whose IDX_BITS-bit two's-complement
  // pattern is i.
  function automatic lut_t build_lut();
    lut_t t;
    for (int i = 0; i < int'(LUT_N); i++) begin
      int  v = (i >= int'(LUT_N / 2)) ? i - int'(LUT_N) : i;
      real y = $tanh(real'(v) / real'(1 << FRAC_BITS)) * real'(1 << (RW - 1));
      t[i] = (RW + 1)'($rtoi(y >= 0.0 ? y + 0.5 : y - 0.5));
    end
    return t;
  endfunction

  localparam lut_t TANH_LUT = build_lut();

  logic signed [IN_BITS-1:0] fsat;
  logic        [IDX_BITS-1:0] idx;
  logic signed [RW:0]         thr;
  logic                       sample;

  always_comb begin
    if (field_i > FMAX)      fsat = FMAX;
    else if (field_i < FMIN) fsat = FMIN;
    else                     fsat = field_i;
    idx    = fsat[IDX_BITS-1:0];
    thr    = TANH_LUT[idx];
    sample = ($signed({rnd_i[RW-1], rnd_i}) < thr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state_o <= INIT;
    else if (en_i) state_o <= sample;
  end
endmodule
