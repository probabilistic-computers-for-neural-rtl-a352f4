// tb_single_board_frbm: the single-board workload at full size. One
// pcomputer_node with every parameter at its default (a 35 x 35 torus, a
// visible and a hidden layer, k = 2, s6.3 weights: 2450 p-bits) is driven only
// through its host port, with its two boundary links looped back. With the
// stripe covering the whole torus the halos are not used, so the loop-back
// only keeps the receivers fed.
//  1. After reset all weights and biases are zero, so every p-bit is a fair
//     coin: after a free run the number of +1 spins must lie within five
//     standard deviations of 1225 (sigma = sqrt(2450) / 2).
//  2. Every visible spin gets a random bias of +-25 and every hidden spin one
//     coupling of +-25 to a randomly chosen one of its 13 neighbours (local or
//     across the periodic wrap). A counted run of 3 sweeps must end with done,
//     report 3 sweeps, and leave a snapshot in which every visible spin
//     follows its bias and every hidden spin the expected copy of its
//     neighbour.
//  3. The visible biases are reversed and the hidden coupling signs flipped,
//     and a clamped run follows: the visible layer must keep its state and
//     every hidden spin must flip.
// The lattice size, radius and weight format are those of the single-board
// machine of the source design; the test patterns are this testbench's own.
// Mechanisms counted: weight writes, free runs, stops, counted runs, clamped
// runs and couplings that wrap round the torus.
module tb_single_board_frbm;
  import pc_pkg::*;
  localparam int L = 35, K = 2, DEG = 13, NS = L * L, NST = 2 * NS,
                 NWORDS = (NST + 31) / 32;
  localparam logic [9:0] BIG = 10'sd200, NBIG = -10'sd200;   // +-25 in s6.3
  logic clk = 0, rst_n = 0;
  logic we = 0, re = 0, rvalid;
  logic [31:0] addr = '0, wdata = '0, rdata;
  logic nclk, sclk, nfr, sfr;
  logic [7:0] nd, sd;
  int checks = 0, failures = 0;
  int n_wr = 0, n_free = 0, n_stop = 0, n_count = 0, n_clamp = 0, n_wrap = 0;
  int dro[DEG], dco[DEG];
  logic [NS-1:0] vpat;
  int hslot[NS];
  bit hneg[NS];

  pcomputer_node dut (
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
  task automatic read_state(output logic [NST-1:0] s);
    logic [32*NWORDS-1:0] all;
    for (int w = 0; w < NWORDS; w++) begin
      logic [31:0] d;
      hr({2'b01, 30'(w)}, d);
      all[32*w +: 32] = d;
    end
    s = all[NST-1:0];
  endtask

  function automatic int md(int a); return (a % L + L) % L; endfunction

  task automatic load(bit reversed);
    for (int i = 0; i < NS; i++) begin
      wrw(0, i, 2 * DEG, (vpat[i] ^ reversed) ? BIG : NBIG);
      wrw(1, i, hslot[i], (hneg[i] ^ reversed) ? NBIG : BIG);
    end
  endtask

  task automatic check_lattice(bit hidden_flipped, string what);
    logic [NST-1:0] s;
    int badv = 0, badh = 0;
    read_state(s);
    for (int i = 0; i < NS; i++) begin
      int r, c, src;
      r = i / L; c = i % L;
      src = md(r + dro[hslot[i]]) * L + md(c + dco[hslot[i]]);
      if (s[i] != vpat[i]) badv++;
      if (s[NS + i] != (vpat[src] ^ hneg[i] ^ hidden_flipped)) badh++;
    end
    check(badv == 0 && badh == 0,
          $sformatf("%s: %0d visible and %0d hidden spins wrong", what, badv, badh));
  endtask

  initial begin
    int n0 = 0;
    for (int dr = -K; dr <= K; dr++)
      for (int dc = -K; dc <= K; dc++)
        if (dr * dr + dc * dc <= K * K) begin dro[n0] = dr; dco[n0] = dc; n0++; end
  end

  initial begin
    logic [31:0] d;
    logic [NST-1:0] s;
    int ones;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. zero parameters: fair coins
    hw({24'd0, REG_NSWEEP}, 32'd0);
    hw({24'd0, REG_CTRL}, 32'd1);
    n_free++;
    repeat (50) @(negedge clk);
    hw({24'd0, REG_CTRL}, 32'd4);
    n_stop++;
    hr({24'd0, REG_STATUS}, d);
    check(d[0] == 1'b0, "free run stopped");
    hw({24'd0, REG_CTRL}, 32'd8);
    read_state(s);
    ones = $countones(s);
    check(ones > 1225 - 124 && ones < 1225 + 124, $sformatf("%0d of 2450 spins +1 at zero field", ones));

    // 2. pattern and one coupling per hidden spin
    for (int i = 0; i < NS; i++) begin
      int r, c;
      vpat[i] = 1'($urandom);
      hslot[i] = $urandom % DEG;
      hneg[i] = 1'($urandom);
      r = i / L + dro[hslot[i]]; c = i % L + dco[hslot[i]];
      if (r < 0 || r >= L || c < 0 || c >= L) n_wrap++;
    end
    load(0);
    hw({24'd0, REG_NSWEEP}, 32'd3);
    hw({24'd0, REG_CTRL}, 32'd1);
    n_count++;
    repeat (10) @(negedge clk);
    hr({24'd0, REG_STATUS}, d);
    check(d[1:0] == 2'b10, "counted run done");
    hr({24'd0, REG_SWEEPS}, d);
    check(d == 3, $sformatf("counted run made %0d sweeps", d));
    check_lattice(0, "counted run");

    // 3. clamped run with reversed visible biases and flipped couplings
    load(1);
    hw({24'd0, REG_NSWEEP}, 32'd2);
    hw({24'd0, REG_CTRL}, 32'd3);
    n_clamp++;
    repeat (10) @(negedge clk);
    hr({24'd0, REG_STATUS}, d);
    check(d[1:0] == 2'b10, "clamped run done");
    check_lattice(1, "clamped run");

    $display("mechanisms: weight writes %0d, free runs %0d, stops %0d, counted runs %0d, clamped runs %0d, wrapping couplings %0d",
             n_wr, n_free, n_stop, n_count, n_clamp, n_wrap);
    check(n_wr > 0 && n_free > 0 && n_stop > 0 && n_count > 0 && n_clamp > 0 && n_wrap > 0,
          "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
