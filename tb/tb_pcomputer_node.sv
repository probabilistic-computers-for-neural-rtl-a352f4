// tb_pcomputer_node: one FPGA in the deep Boltzmann machine configuration
// (three 6 x 6 layers, s4.5 weights), driven only through its host port and
// with each boundary link looped back to the node's own receiver. It runs the
// dual-sampling sequence the host would run:
//  1. load visible biases (a random pattern of +-12.5) and couplings that make
//     every hidden spin copy the visible spin below it and every deep spin copy
//     the hidden spin below it;
//  2. a counted run of 3 sweeps (an outer sample); the snapshot must show the
//     pattern in all three layers, and the run must last exactly 6 clocks;
//  3. clamp the visible layer, reverse its biases and the hidden coupling, and
//     run 2 sweeps (an inner, conditional sample): visible unchanged, hidden
//     and deep inverted;
//  4. a free run ended by stop;
//  5. both boundary links must have delivered frames.
// It counts how often each mechanism happened and fails if one never did.
module tb_pcomputer_node;
  import pc_pkg::*;
  localparam int L = 6, NL = 3, NS = L * L;
  localparam logic [9:0] BIG = 10'sd400, NBIG = -10'sd400;   // +-12.5 in s4.5
  logic clk = 0, rst_n = 0;
  logic we, re, rvalid;
  logic [31:0] addr, wdata, rdata;
  logic nclk, sclk, nfr, sfr;
  logic [7:0] nd, sd;
  int checks = 0, failures = 0;
  int n_wr = 0, n_runs = 0, n_clamped = 0, n_stops = 0, n_snap_reads = 0;

  pcomputer_node #(.L(L), .ROWS(L), .NLAYERS(NL), .K(2), .FRAC_BITS(5), .LANES(8)) dut (
    .clk, .rst_n, .host_we_i(we), .host_re_i(re), .host_addr_i(addr), .host_wdata_i(wdata),
    .host_rdata_o(rdata), .host_rvalid_o(rvalid),
    .n_tx_clk_o(nclk), .n_tx_data_o(nd), .n_tx_frame_o(nfr),
    .n_rx_clk_i(sclk), .n_rx_data_i(sd), .n_rx_frame_i(sfr),
    .s_tx_clk_o(sclk), .s_tx_data_o(sd), .s_tx_frame_o(sfr),
    .s_rx_clk_i(nclk), .s_rx_data_i(nd), .s_rx_frame_i(nfr));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hw(logic [31:0] a, logic [31:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
  endtask
  task automatic hr(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); re = 1; addr = a;
    @(negedge clk); re = 0;
    d = rdata;
  endtask
  task automatic wrw(int layer, int site, int slot, logic [9:0] v);
    hw({2'b10, 2'(layer), 20'(site), 8'(slot)}, 32'(v));
    n_wr++;
  endtask
  task automatic read_state(output logic [NL*NS-1:0] s);
    logic [31:0] d;
    logic [4*32-1:0] acc;
    for (int w = 0; w < 4; w++) begin hr({2'b01, 30'(w)}, d); acc[w*32 +: 32] = d; n_snap_reads++; end
    s = acc[NL*NS-1:0];
  endtask
  // start a counted run, wait for done, return the clocks from start to done
  task automatic run(int n, bit clampv, output int cyc);
    logic [31:0] d;
    hw({24'd0, REG_NSWEEP}, 32'(n));
    @(negedge clk); we = 1; addr = {24'd0, REG_CTRL}; wdata = {30'd0, clampv, 1'b1};
    @(negedge clk); we = 0;
    cyc = 0;
    while (!dut.busy) begin @(negedge clk); cyc++; end
    while (dut.busy) begin @(negedge clk); cyc++; end
    hr({24'd0, REG_STATUS}, d);
    check(d[1:0] == 2'b10, "status done after run");
    n_runs++;
    if (clampv) n_clamped++;
  endtask

  initial begin
    logic [NS-1:0] pat;
    logic [NL*NS-1:0] s;
    logic [31:0] d;
    int cyc, bad;
    we = 0; re = 0; addr = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    pat = {$urandom, $urandom};
    for (int i = 0; i < NS; i++) begin
      wrw(0, i, 26, pat[i] ? BIG : NBIG);
      wrw(1, i, 6, BIG);
      wrw(2, i, 6, BIG);
    end
    run(3, 0, cyc);
    check(cyc == 7, $sformatf("3 sweeps: busy for %0d clocks, expected 6 plus the start clock", cyc));
    read_state(s);
    check(s[0 +: NS] == pat && s[NS +: NS] == pat && s[2*NS +: NS] == pat, "outer sample: all layers follow the pattern");
    hr({24'd0, REG_SWEEPS}, d);
    check(d == 3, "sweep counter");
    // clamped inner sample
    for (int i = 0; i < NS; i++) begin
      wrw(0, i, 26, pat[i] ? NBIG : BIG);
      wrw(1, i, 6, NBIG);
    end
    run(2, 1, cyc);
    check(cyc == 5, $sformatf("2 clamped sweeps: %0d clocks", cyc));
    read_state(s);
    check(s[0 +: NS] == pat, "clamped visible layer held");
    check(s[NS +: NS] == ~pat && s[2*NS +: NS] == ~pat, "hidden and deep resampled under clamp");
    // free run, then stop
    hw({24'd0, REG_NSWEEP}, 32'd0);
    hw({24'd0, REG_CTRL}, 32'd1);
    repeat (50) @(negedge clk);
    hr({24'd0, REG_STATUS}, d);
    check(d[0], "free run busy");
    hw({24'd0, REG_CTRL}, 32'd4);
    n_stops++;
    repeat (2) @(negedge clk);
    hr({24'd0, REG_STATUS}, d);
    check(d[1:0] == 2'b10, "stopped");
    read_state(s);
    bad = 0;
    for (int i = 0; i < NS; i++) if (s[i] != !pat[i] || s[NS + i] != pat[i] || s[2*NS + i] != pat[i]) bad++;
    check(bad == 0, "free run: visible follows reversed bias, hidden and deep invert it");
    // boundary links (looped back)
    begin
      logic [31:0] fn, fs;
      hr({24'd0, REG_HALO_N}, fn);
      hr({24'd0, REG_HALO_S}, fs);
      check(fn > 10 && fs > 10, $sformatf("boundary frames %0d / %0d", fn, fs));
    end
    check(n_wr > 0 && n_runs >= 2 && n_clamped > 0 && n_stops > 0 && n_snap_reads > 0,
          $sformatf("mechanisms: writes %0d runs %0d clamped %0d stops %0d reads %0d",
                    n_wr, n_runs, n_clamped, n_stops, n_snap_reads));
    $display("mechanisms: weight writes %0d, counted runs %0d, clamped runs %0d, stops %0d, snapshot reads %0d",
             n_wr, n_runs, n_clamped, n_stops, n_snap_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
