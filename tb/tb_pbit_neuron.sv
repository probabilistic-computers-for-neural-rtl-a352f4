// tb_pbit_neuron: statistical check of the p-bit. For several local fields x
// (s6.3 fixed point) it draws 4000 samples with uniform random numbers and
// compares the fraction of +1 states with (1 + tanh(x)) / 2 within five
// standard deviations; saturated fields must give a deterministic state, and
// the state must hold while en_i is low.
module tb_pbit_neuron;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [13:0] field;
  logic [7:0] rnd;
  logic st;
  int checks = 0, failures = 0;

  pbit_neuron #(.IN_BITS(14), .FRAC_BITS(3), .RW(8)) dut (
    .clk, .rst_n, .en_i(en), .field_i(field), .rnd_i(rnd), .state_o(st));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(int fx, int n, output int ones);
    ones = 0;
    field = 14'(fx);
    en = 1;
    for (int i = 0; i < n; i++) begin
      rnd = 8'($urandom);
      @(posedge clk); #1;
      ones += int'(st);
    end
    en = 0;
  endtask

  initial begin
    int fields[8] = '{0, 4, -4, 8, -12, 16, 3, -20};  // x = f / 8
    int ones;
    field = 0; rnd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (fields[k]) begin
      real p, sd, got;
      measure(fields[k], 4000, ones);
      p   = (1.0 + $tanh(real'(fields[k]) / 8.0)) / 2.0;
      sd  = $sqrt(p * (1.0 - p) / 4000.0) + 1.0 / 256.0;
      got = real'(ones) / 4000.0;
      checks++;
      if (got < p - 5.0 * sd || got > p + 5.0 * sd) begin
        failures++;
        $display("FAIL field %0d: P(+1) %f expected %f", fields[k], got, p);
      end
    end
    measure(200, 500, ones);  // x = 25: saturated high
    checks++; if (ones != 500) begin failures++; $display("FAIL saturate high %0d", ones); end
    measure(-3000, 500, ones);  // large negative field
    checks++; if (ones != 0) begin failures++; $display("FAIL saturate low %0d", ones); end
    // hold: with en low the state must not change whatever the field
    measure(200, 1, ones);
    field = -14'd3000;
    repeat (5) @(posedge clk); #1;
    checks++; if (st !== 1'b1) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
