// tb_sparse_bm_core: checks the wiring and update rules of the p-bit array.
// A three-layer 6 x 6 array (whole torus on one chip) and a two-layer stripe
// of 2 rows of a 6 x 6 torus with testbench-driven halos. Strong biases and
// couplings make p-bits deterministic (|field| >= 8 saturates tanh), so
// each coupling can be checked exactly:
//  - visible spins follow their biases; hidden spins copy (or invert) the
//    visible spin at a chosen offset, wrapping round the torus, for several
//    offsets; deep spins copy the hidden spin below them;
//  - with clamp, the visible layer keeps its state although its bias is
//    reversed, while the hidden layer still updates;
//  - in the stripe, edge hidden spins copy the north and south halo bits;
//  - with all parameters zero, states are random (about half +1) and change.
module tb_sparse_bm_core;
  import pc_pkg::*;
  localparam int L = 6, K = 2, DEG = 13, NS = L * L;
  localparam logic [9:0] BIG = 10'sd200, NBIG = -10'sd200;   // +-25.0 in s6.3
  logic clk = 0, rst_n = 0;
  logic [1:0] cen;
  logic clamp;
  logic we;
  logic [1:0] wl;
  logic [5:0] ws;
  logic [7:0] wsl;
  logic [9:0] wd;
  logic [2:0][K-1:0][L-1:0] hz3;
  logic [2:0][L-1:0][L-1:0] st;
  // stripe instance
  logic we2;
  logic [1:0][K-1:0][L-1:0] hn2, hs2;
  logic [1:0][1:0][L-1:0] st2;
  int checks = 0, failures = 0;
  int dro[DEG], dco[DEG];

  sparse_bm_core #(.L(L), .ROWS(L), .NLAYERS(3), .K(K), .FRAC_BITS(3)) u_full (
    .clk, .rst_n, .color_en_i(cen), .clamp_i(clamp), .wr_en_i(we), .wr_layer_i(wl),
    .wr_site_i(ws), .wr_slot_i(wsl), .wr_data_i(wd), .halo_n_i(hz3), .halo_s_i(hz3), .state_o(st));

  sparse_bm_core #(.L(L), .ROWS(2), .NLAYERS(2), .K(K), .FRAC_BITS(3), .SEED(64'h77)) u_stripe (
    .clk, .rst_n, .color_en_i(cen), .clamp_i(1'b0), .wr_en_i(we2), .wr_layer_i(wl),
    .wr_site_i(4'(ws)), .wr_slot_i(wsl), .wr_data_i(wd), .halo_n_i(hn2), .halo_s_i(hs2), .state_o(st2));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(bit second, int layer, int site, int slot, logic [9:0] v);
    @(negedge clk);
    we = !second; we2 = second; wl = 2'(layer); ws = 6'(site); wsl = 8'(slot); wd = v;
    @(negedge clk);
    we = 0; we2 = 0;
  endtask

  task automatic sweeps(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); cen = 2'b01;
      @(negedge clk); cen = 2'b10;
    end
    @(negedge clk); cen = 2'b00;
  endtask

  function automatic int md(int a); return (a % L + L) % L; endfunction

  initial begin
    int n = 0;
    for (int dr = -K; dr <= K; dr++)
      for (int dc = -K; dc <= K; dc++)
        if (dr * dr + dc * dc <= K * K) begin dro[n] = dr; dco[n] = dc; n++; end
  end

  initial begin
    logic [NS-1:0] pat;
    int bad, ones, changed;
    logic [2:0][L-1:0][L-1:0] prev;
    int slots[3] = '{0, 4, 11};
    cen = 0; clamp = 0; we = 0; we2 = 0; wl = 0; ws = 0; wsl = 0; wd = 0;
    hz3 = '0; hn2 = '0; hs2 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // all-zero parameters: random, changing states
    sweeps(1);
    prev = st;
    ones = 0; changed = 0;
    for (int t = 0; t < 20; t++) begin
      sweeps(1);
      for (int l = 0; l < 3; l++) for (int r = 0; r < L; r++) for (int c = 0; c < L; c++) begin
        ones += st[l][r][c];
        changed += (st[l][r][c] != prev[l][r][c]);
      end
      prev = st;
    end
    check(ones > 20 * 108 * 4 / 10 && ones < 20 * 108 * 6 / 10, $sformatf("unbiased p-bits: %0d of %0d ones", ones, 20 * 108));
    check(changed > 20 * 108 / 4, $sformatf("unbiased p-bits change (%0d)", changed));
    // visible biases; hidden copies the visible spin at offset 'slot'; deep copies hidden
    pat = {$urandom, $urandom};
    for (int i = 0; i < NS; i++) begin
      wr(0, 0, i, 26, pat[i] ? BIG : NBIG);
      wr(0, 2, i, 6, BIG);               // deep: lower neighbour (0,0)
    end
    foreach (slots[q]) begin
      int s;
      s = slots[q];
      for (int i = 0; i < NS; i++) begin
        wr(0, 1, i, (q == 0) ? 6 : slots[q-1], 10'd0);
        wr(0, 1, i, s, (q == 1) ? NBIG : BIG);
      end
      sweeps(2);
      bad = 0;
      for (int r = 0; r < L; r++) for (int c = 0; c < L; c++) begin
        logic e;
        if (st[0][r][c] != pat[r * L + c]) bad++;
        e = pat[md(r + dro[s]) * L + md(c + dco[s])] ^ (q == 1);
        if (st[1][r][c] != e) bad++;
        if (st[2][r][c] != st[1][r][c]) bad++;
      end
      check(bad == 0, $sformatf("coupling through slot %0d (offset %0d,%0d): %0d wrong", s, dro[s], dco[s], bad));
    end
    // clamp: reverse visible biases and the hidden coupling sign
    for (int i = 0; i < NS; i++) begin
      wr(0, 0, i, 26, pat[i] ? NBIG : BIG);
      wr(0, 1, i, 11, NBIG);
    end
    clamp = 1;
    sweeps(2);
    bad = 0;
    for (int r = 0; r < L; r++) for (int c = 0; c < L; c++) begin
      if (st[0][r][c] != pat[r * L + c]) begin bad++; $display("v %0d %0d", r, c); end
      if (st[1][r][c] != !pat[md(r + dro[11]) * L + md(c + dco[11])]) begin bad++; $display("h %0d %0d st=%b pat=%b d=%b", r, c, st[1][r][c], pat[md(r + dro[11]) * L + md(c + dco[11])], st[2][r][c]); end
    end
    check(bad == 0, $sformatf("clamped visible layer held, hidden resampled: %0d wrong", bad));
    clamp = 0;
    sweeps(1);
    bad = 0;
    for (int i = 0; i < NS; i++) if (st[0][i / L][i % L] != !pat[i]) bad++;
    check(bad == 0, "visible layer follows again after clamp");
    // stripe with halos: hidden row 0 copies visible row -2 (north halo row 0),
    // hidden row 1 copies visible row 3 (south halo row 1)
    for (int c = 0; c < L; c++) begin
      wr(1, 1, c, 0, BIG);
      wr(1, 1, L + c, 12, BIG);
    end
    for (int t = 0; t < 4; t++) begin
      hn2 = {$urandom, $urandom}; hs2 = {$urandom, $urandom};
      sweeps(1);
      bad = 0;
      for (int c = 0; c < L; c++) begin
        if (st2[1][0][c] != hn2[0][0][c]) bad++;
        if (st2[1][1][c] != hs2[0][1][c]) bad++;
      end
      check(bad == 0, $sformatf("halo coupling round %0d: %0d wrong", t, bad));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
