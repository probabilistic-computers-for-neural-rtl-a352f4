// tb_xoshiro128pp: checks the xoshiro128++ generator against a reference model
// of the published algorithm written with plain integer arithmetic, from the
// seed {s0,s1,s2,s3} = {1,2,3,4}; the first output must be 641. Also checks
// that the generator holds its state while en_i is low.
module tb_xoshiro128pp;
  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;

  xoshiro128pp #(.SEED({32'd4, 32'd3, 32'd2, 32'd1})) dut (.clk, .rst_n, .en_i(en), .rnd_o(rnd));

  always #5 clk = ~clk;

  int unsigned m[4] = '{1, 2, 3, 4};

  function automatic int unsigned rl(int unsigned x, int k);
    return (x << k) | (x >> (32 - k));
  endfunction

  function automatic int unsigned ref_next();
    int unsigned res = rl(m[0] + m[3], 7) + m[0];
    int unsigned t = m[1] << 9;
    m[2] ^= m[0]; m[3] ^= m[1]; m[1] ^= m[2]; m[0] ^= m[3]; m[2] ^= t; m[3] = rl(m[3], 11);
    return res;
  endfunction

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, exp);
    end
  endtask

  initial begin
    #1000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(rnd, 32'd641, "first output");
    en = 1;
    for (int i = 0; i < 40; i++) begin
      check(rnd, ref_next(), $sformatf("output %0d", i));
      @(negedge clk);
    end
    en = 0;
    begin
      logic [31:0] held;
      held = rnd;
      repeat (3) @(negedge clk);
      check(rnd, held, "hold while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
