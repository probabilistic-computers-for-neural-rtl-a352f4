// tb_sweep_controller: checks the colour schedule (colour 0 then colour 1,
// never both), the run length (busy for exactly 2 * n clocks, the first
// colour enable in the clock after start), the sweep count, the done pulse,
// the clamp capture, a free run ended by stop, and that start while busy is
// ignored.
module tb_sweep_controller;
  logic clk = 0, rst_n = 0;
  logic start, stop, clamp;
  logic [31:0] n;
  logic [1:0] cen;
  logic clamp_q, busy, done;
  logic [31:0] sweeps;
  int checks = 0, failures = 0;

  sweep_controller #(.NCOLORS(2)) dut (
    .clk, .rst_n, .start_i(start), .stop_i(stop), .clamp_i(clamp), .n_sweeps_i(n),
    .color_en_o(cen), .clamp_o(clamp_q), .busy_o(busy), .done_o(done), .sweeps_o(sweeps));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int nsw, bit clampv, bit extra_start);
    int busy_cyc = 0, dones = 0, c0 = 0, c1 = 0, bad_order = 0;
    logic [1:0] expect_c = 2'b01;
    @(negedge clk);
    start = 1; n = nsw; clamp = clampv;
    @(negedge clk);
    start = 0;
    check(cen == 2'b01, "colour 0 first, one clock after start");
    check(clamp_q == clampv, "clamp captured");
    while (busy) begin
      busy_cyc++;
      if (cen != expect_c) bad_order++;
      expect_c = {expect_c[0], expect_c[1]};
      if (extra_start && busy_cyc == 3) start = 1; else start = 0;
      @(negedge clk);
      if (done) dones++;
    end
    check(bad_order == 0, "colour order");
    check(busy_cyc == 2 * nsw, $sformatf("run length %0d clocks for %0d sweeps", busy_cyc, nsw));
    check(dones == 1, "one done pulse");
    check(sweeps == nsw, "sweep count");
  endtask

  initial begin
    start = 0; stop = 0; clamp = 0; n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(cen == 2'b00 && !busy, "idle after reset");
    run(5, 0, 0);
    run(1, 1, 0);
    run(12, 0, 1);
    // free run, ended by stop
    @(negedge clk);
    start = 1; n = 0;
    @(negedge clk);
    start = 0;
    repeat (41) @(negedge clk);
    check(busy, "free run still busy");
    stop = 1;
    #1;
    check(cen == 2'b00, "no colour enable during stop");
    @(negedge clk);
    stop = 0;
    check(done && !busy, "stop ends the run");
    check(sweeps == 20, $sformatf("sweeps in free run %0d", sweeps));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
